// register_file_tb: self-checking test of one tree's 16-bank register file.
// Each cycle every bank gets a random read address and, at random, a write
// from the load vector or from the PE of a random level that the output-to-
// bank mapping assigns to it (bank b, level l -> PE b/2**(l+1) of level l).
// A reference copy of all banks is kept here; combinational reads are
// checked every cycle (old data on a same-cycle read/write of one address).
module register_file_tb;
  localparam int BANKS = 16, DEPTH = 64, L = 4, NPE = 15;
  logic clk = 0;
  logic [BANKS-1:0][5:0]  raddr, waddr;
  logic [BANKS-1:0][31:0] rdata, mem_wdata;
  logic [BANKS-1:0]       wen, wmem;
  logic [BANKS-1:0][1:0]  wlvl;
  logic [NPE-1:0][31:0]   pe_out;
  logic [31:0] model [BANKS][DEPTH];
  int checks = 0, failures = 0;
  int lvl_hits [L+1];

  register_file dut (.clk(clk), .raddr(raddr), .rdata(rdata), .wen(wen), .wmem(wmem),
                     .wlvl(wlvl), .waddr(waddr), .pe_out(pe_out), .mem_wdata(mem_wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PE index (level-major) that may write bank b at level l
  function automatic int src_pe(int b, int l);
    int base = 0;
    for (int k = 0; k < l; k++) base += 8 >> k;
    return base + b / (2 << l);
  endfunction

  logic [31:0] wval [BANKS];

  initial begin
    // fill every register through the load path
    for (int r = 0; r < DEPTH; r++) begin
      for (int b = 0; b < BANKS; b++) begin
        wen[b] = 1; wmem[b] = 1; wlvl[b] = 0; waddr[b] = 6'(r); raddr[b] = 0;
        mem_wdata[b] = $urandom; model[b][r] = mem_wdata[b];
      end
      pe_out = '0;
      @(posedge clk); #1;
    end
    for (int c = 0; c < 3000; c++) begin
      for (int i = 0; i < NPE; i++) pe_out[i] = $urandom;
      for (int b = 0; b < BANKS; b++) begin
        raddr[b] = 6'($urandom); waddr[b] = (c % 5 == 0) ? raddr[b] : 6'($urandom);
        wen[b] = $urandom % 2; wmem[b] = 1'(($urandom % 5) == 0); wlvl[b] = 2'($urandom);
        mem_wdata[b] = $urandom;
        wval[b] = wmem[b] ? mem_wdata[b] : pe_out[src_pe(b, int'(wlvl[b]))];
      end
      #1;
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (rdata[b] !== model[b][raddr[b]]) begin
          failures++;
          if (failures < 10) $display("c=%0d bank %0d addr %0d: %h exp %h", c, b, raddr[b], rdata[b], model[b][raddr[b]]);
        end
      end
      @(posedge clk); #1;
      for (int b = 0; b < BANKS; b++) if (wen[b]) begin
        model[b][waddr[b]] = wval[b];
        lvl_hits[wmem[b] ? L : int'(wlvl[b])]++;
      end
    end
    for (int l = 0; l <= L; l++) begin
      checks++;
      if (lvl_hits[l] == 0) begin failures++; $display("write source %0d never used", l); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
