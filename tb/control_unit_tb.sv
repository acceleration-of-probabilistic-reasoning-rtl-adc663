// control_unit_tb: self-checking test of the instruction sequencer.
// A behavioural program store (one-clock read, like the instruction memory)
// holds random instructions with a halt bit at a chosen position. After a
// start pulse, instruction k must appear unchanged as the control word in
// cycle start+1+k with busy high, the halting instruction must be the last
// one executed, done must pulse once in the following cycle, and outside a
// run the control word must carry no register write and no memory operation.
// Several runs of different lengths are made back to back.
module control_unit_tb;
  import spn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, imem_ren;
  logic [9:0] imem_raddr, exec_pc;
  instr_t imem_rdata, ctrl;
  instr_t prog [IMEM_DEPTH];
  int checks = 0, failures = 0;

  control_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
                    .imem_ren(imem_ren), .imem_raddr(imem_raddr), .imem_rdata(imem_rdata),
                    .ctrl(ctrl), .exec_pc(exec_pc));

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (imem_ren) imem_rdata <= prog[imem_raddr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t rnd_instr();
    logic [INSTR_W-1:0] v;
    for (int i = 0; i < INSTR_W; i += 32) v[i +: 32] = $urandom;
    v = instr_t'(v);
    return v;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: %s", $time, msg); end
  endtask

  task automatic run(int len);
    int k;
    for (int i = 0; i < len + 3; i++) begin
      prog[i] = rnd_instr();
      prog[i].halt = (i == len - 1);
      prog[i].mem_op = mem_op_e'($urandom % 3);
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (k = 0; k < len; k++) begin
      check(busy, "busy low during run");
      check(ctrl == prog[k], $sformatf("control word %0d differs", k));
      check(exec_pc == 10'(k), $sformatf("exec_pc %0d, expected %0d", exec_pc, k));
      check(!done, "done before halt");
      @(negedge clk);
    end
    check(done, "no done pulse after halt");
    check(!busy, "busy after halt");
    check(ctrl.mem_op == MEM_NONE, "memory operation while idle");
    for (int b = 0; b < N_BANKS; b++) check(!ctrl.wr[b].en, "register write while idle");
    @(negedge clk);
    check(!done, "done longer than one cycle");
    repeat (3) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < IMEM_DEPTH; i++) prog[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!busy && !done, "not idle after reset");
    run(1);
    run(2);
    run(17);
    run(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
