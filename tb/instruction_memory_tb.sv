// instruction_memory_tb: self-checking test of the VLIW program store.
// Writes random full-width instructions to random addresses, then reads
// addresses back with ren and checks the word one clock later, and that the
// output holds while ren is low.
module instruction_memory_tb;
  import spn_pkg::*;
  localparam int DEPTH = IMEM_DEPTH, W = INSTR_W;
  logic clk = 0;
  logic ren, wen;
  logic [9:0] raddr, waddr;
  logic [W-1:0] rdata, wdata;
  logic [W-1:0] model [DEPTH];
  logic         valid [DEPTH];
  logic [W-1:0] held;
  int checks = 0, failures = 0;

  instruction_memory dut (.clk(clk), .ren(ren), .raddr(raddr), .rdata(rdata),
                          .wen(wen), .waddr(waddr), .wdata(wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    ren = 0; wen = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    for (int i = 0; i < 2000; i++) begin
      wen = 1; waddr = 10'($urandom); wdata = rnd();
      model[waddr] = wdata; valid[waddr] = 1;
      @(posedge clk); #1;
    end
    wen = 0;
    for (int i = 0; i < 2000; i++) begin
      do raddr = 10'($urandom); while (!valid[raddr]);
      ren = 1;
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; if (failures < 10) $display("addr %0d mismatch", raddr); end
      held = rdata; ren = 0; raddr = raddr + 1;
      @(posedge clk); #1;
      checks++;
      if (rdata !== held) begin failures++; $display("output not held with ren low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
