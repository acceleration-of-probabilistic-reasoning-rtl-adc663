// spn_processor_tb: end-to-end test of the SPN processor at its full size
// (2 trees x 15 PEs, 32 banks x 64 registers, 512-vector data memory).
//
// Part 1, an SPN evaluation: a random 32-leaf sum-product network (two
// 16-leaf binary sub-networks whose roots are joined by a sum node) is
// written to the data memory, loaded into the banks with one vector load,
// evaluated by both trees in parallel, joined by a read across the crossbar
// from the other tree's register file, and stored back together with the
// level-1 and level-2 intermediate nodes. The results are compared with the
// SPN evaluated here node by node as a list of operations (A[i] = A[B[i]]
// op A[C[i]]), and the run must take exactly as many cycles as it has
// instructions.
//
// Part 2, random programs: every register is filled by vector loads, then
// random VLIW instructions (random PE operations, crossbar selects, read
// addresses, write sources and addresses, loads and stores) run, and all
// registers are stored at the end. An instruction-level reference model of
// the architecture, kept here, predicts the data memory, which the host
// reads back word by word.
//
// A monitor counts how often each mechanism of the design was used (vector
// load, vector store, write from each tree level and from memory, a tree
// reading another tree's bank, each PE operation, a saturated result, halt);
// one that never happened counts as a failure.
module spn_processor_tb;
  import spn_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  logic [IADDR_W-1:0] exec_pc;
  logic imem_we = 0;
  logic [IADDR_W-1:0] imem_waddr = '0;
  instr_t imem_wdata;
  logic h_en = 0, h_we = 0;
  logic [HADDR_W-1:0] h_addr = '0;
  logic [DATA_W-1:0] h_wdata = '0, h_rdata;

  int checks = 0, failures = 0;

  spn_processor dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done), .exec_pc(exec_pc),
    .imem_we(imem_we), .imem_waddr(imem_waddr), .imem_wdata(imem_wdata),
    .h_en(h_en), .h_we(h_we), .h_addr(h_addr), .h_wdata(h_wdata), .h_rdata(h_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, msg); end
  endtask

  // ---------------------------------------------------------------------
  // Reference arithmetic (unsigned 1.31 fixed point, saturating)
  function automatic word_t f_op(pe_op_e o, word_t x, word_t z);
    logic [63:0] s, p;
    s = {32'd0, x} + {32'd0, z};
    p = ({32'd0, x} * {32'd0, z}) >> FRAC_W;
    case (o)
      PE_ADD:    return (s[63:32] != 0) ? '1 : s[31:0];
      PE_MUL:    return (p[63:32] != 0) ? '1 : p[31:0];
      PE_PASS_A: return x;
      default:   return z;
    endcase
  endfunction

  function automatic int lvl_base(int l);
    int base = 0;
    for (int k = 0; k < l; k++) base += (TREE_INPUTS / 2) >> k;
    return base;
  endfunction

  // ---------------------------------------------------------------------
  // Instruction-level reference model of the processor
  word_t m_rf  [N_BANKS][BANK_DEPTH];
  word_t m_pe  [N_TREES][TREE_PES];
  word_t m_ld  [N_BANKS];
  word_t m_dm  [DMEM_DEPTH][N_BANKS];

  task automatic model_exec(instr_t in);
    word_t rd [N_BANKS];
    word_t ti [N_INPUTS];
    word_t npe [N_TREES][TREE_PES];
    for (int b = 0; b < N_BANKS; b++) rd[b] = m_rf[b][in.raddr[b]];
    for (int i = 0; i < N_INPUTS; i++) ti[i] = rd[in.xbar_sel[i]];
    for (int t = 0; t < N_TREES; t++)
      for (int l = 0; l < TREE_LEVELS; l++)
        for (int j = 0; j < (TREE_INPUTS >> (l + 1)); j++) begin
          int p = lvl_base(l) + j;
          if (l == 0) npe[t][p] = f_op(in.pe_op[t][p], ti[t*TREE_INPUTS + 2*j], ti[t*TREE_INPUTS + 2*j + 1]);
          else        npe[t][p] = f_op(in.pe_op[t][p], m_pe[t][lvl_base(l-1) + 2*j], m_pe[t][lvl_base(l-1) + 2*j + 1]);
        end
    for (int b = 0; b < N_BANKS; b++)
      if (in.wr[b].en) begin
        int t = b / BANKS_PER_TREE, lb = b % BANKS_PER_TREE, l = int'(in.wr[b].level);
        m_rf[b][in.wr[b].addr] = in.wr[b].from_mem ? m_ld[b] : m_pe[t][lvl_base(l) + (lb >> (l + 1))];
      end
    if (in.mem_op == MEM_LOAD)  for (int b = 0; b < N_BANKS; b++) m_ld[b] = m_dm[in.mem_addr][b];
    if (in.mem_op == MEM_STORE) for (int b = 0; b < N_BANKS; b++) m_dm[in.mem_addr][b] = rd[b];
    m_pe = npe;
  endtask

  // ---------------------------------------------------------------------
  // Mechanism coverage, counted from the control word the datapath executes
  int n_load, n_store, n_wr_mem, n_cross, n_halt, n_sat;
  int n_wr_lvl [TREE_LEVELS];
  int n_op [4];

  always @(posedge clk) if (busy) begin
    instr_t c;
    c = dut.ctrl;
    if (c.mem_op == MEM_LOAD)  n_load++;
    if (c.mem_op == MEM_STORE) n_store++;
    if (c.halt) n_halt++;
    for (int b = 0; b < N_BANKS; b++)
      if (c.wr[b].en) begin
        if (c.wr[b].from_mem) n_wr_mem++;
        else n_wr_lvl[c.wr[b].level]++;
      end
    for (int i = 0; i < N_INPUTS; i++)
      if (int'(c.xbar_sel[i]) / BANKS_PER_TREE != i / TREE_INPUTS) n_cross++;
    for (int t = 0; t < N_TREES; t++)
      for (int p = 0; p < TREE_PES; p++) n_op[c.pe_op[t][p]]++;
  end
  // a saturated PE result: all ones at a PE output register
  always @(posedge clk) if (busy)
    for (int p = 0; p < TREE_PES; p++) if (dut.g_tree[0].pe_out[p] == '1) n_sat++;

  // ---------------------------------------------------------------------
  // Program and host helpers
  instr_t prog [$];

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    for (int t = 0; t < N_TREES; t++)
      for (int p = 0; p < TREE_PES; p++) i.pe_op[t][p] = PE_PASS_A;
    return i;
  endfunction

  task automatic host_write(int v, int b, word_t d);
    @(negedge clk);
    h_en = 1; h_we = 1; h_addr = {DADDR_W'(v), XSEL_W'(b)}; h_wdata = d;
    @(negedge clk);
    h_en = 0; h_we = 0;
    m_dm[v][b] = d;
  endtask

  task automatic host_read(int v, int b, output word_t d);
    @(negedge clk);
    h_en = 1; h_we = 0; h_addr = {DADDR_W'(v), XSEL_W'(b)};
    @(negedge clk);
    h_en = 0;
    d = h_rdata;
  endtask

  // Load prog into the instruction memory, run it, check the cycle count,
  // and step the reference model through it.
  task automatic run_prog(output int cycles);
    foreach (prog[k]) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = IADDR_W'(k); imem_wdata = prog[k];
    end
    @(negedge clk);
    imem_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    foreach (prog[k]) model_exec(prog[k]);
  endtask

  task automatic compare_vectors(int v0, int v1, string what);
    word_t d;
    for (int v = v0; v <= v1; v++)
      for (int b = 0; b < N_BANKS; b++) begin
        host_read(v, b, d);
        check(d === m_dm[v][b], $sformatf("%s: vector %0d bank %0d = %h, expected %h", what, v, b, d, m_dm[v][b]));
      end
  endtask

  // ---------------------------------------------------------------------
  // Part 1: SPN evaluation, checked against a list-of-operations evaluation
  localparam int NLEAF = 2 * TREE_INPUTS;           // 32 leaves
  localparam int NNODE = 2 * TREE_PES + 1;          // 31 operations
  word_t  A [NLEAF + NNODE];
  pe_op_e O [NNODE];
  int     Bi [NNODE], Ci [NNODE];
  int     node_of [N_TREES][TREE_PES];              // SPN node index of each PE

  task automatic spn_test();
    int n, cyc;
    instr_t i;
    word_t d;
    // build the SPN: tree t leaves are A[16t .. 16t+15]
    n = 0;
    for (int t = 0; t < N_TREES; t++)
      for (int l = 0; l < TREE_LEVELS; l++)
        for (int j = 0; j < (TREE_INPUTS >> (l + 1)); j++) begin
          O[n] = ($urandom % 2) ? PE_ADD : PE_MUL;
          if (l == 0) begin Bi[n] = t*TREE_INPUTS + 2*j; Ci[n] = t*TREE_INPUTS + 2*j + 1; end
          else begin
            Bi[n] = NLEAF + node_of[t][lvl_base(l-1) + 2*j];
            Ci[n] = NLEAF + node_of[t][lvl_base(l-1) + 2*j + 1];
          end
          node_of[t][lvl_base(l) + j] = n;
          n++;
        end
    O[n] = PE_ADD; Bi[n] = NLEAF + node_of[0][TREE_PES-1]; Ci[n] = NLEAF + node_of[1][TREE_PES-1];
    // leaves: probabilities below 0.5 so that sums stay in range
    for (int k = 0; k < NLEAF; k++) begin
      A[k] = $urandom % 32'h4000_0000;
      host_write(0, k, A[k]);
    end
    // reference: the SPN as a loop over its operation list
    for (int k = 0; k < NNODE; k++) A[NLEAF + k] = f_op(O[k], A[Bi[k]], A[Ci[k]]);

    prog.delete();
    i = nop(); i.mem_op = MEM_LOAD; i.mem_addr = 0; prog.push_back(i);          // 0
    i = nop();                                                                  // 1
    for (int b = 0; b < N_BANKS; b++) begin i.wr[b].en = 1; i.wr[b].from_mem = 1; i.wr[b].addr = 0; end
    prog.push_back(i);
    for (int l = 0; l < TREE_LEVELS; l++) begin                                 // 2..5
      i = nop();
      if (l == 0) for (int k = 0; k < N_INPUTS; k++) i.xbar_sel[k] = XSEL_W'(k);
      for (int t = 0; t < N_TREES; t++)
        for (int j = 0; j < (TREE_INPUTS >> (l + 1)); j++)
          i.pe_op[t][lvl_base(l) + j] = O[node_of[t][lvl_base(l) + j]];
      // level l-1 results of tree 0 are written while level l computes
      if (l == 2) for (int j = 0; j < 4; j++) begin                            // level 1 -> banks 4j+2, reg 3
        i.wr[4*j+2].en = 1; i.wr[4*j+2].level = 1; i.wr[4*j+2].addr = 3; end
      if (l == 3) for (int j = 0; j < 2; j++) begin                            // level 2 -> banks 8j+1, reg 4
        i.wr[8*j+1].en = 1; i.wr[8*j+1].level = 2; i.wr[8*j+1].addr = 4; end
      prog.push_back(i);
    end
    i = nop();                                                                  // 6: roots -> bank 0 / bank 16, reg 1
    i.wr[0].en = 1;  i.wr[0].level = 3;  i.wr[0].addr = 1;
    i.wr[16].en = 1; i.wr[16].level = 3; i.wr[16].addr = 1;
    prog.push_back(i);
    i = nop();                                                                  // 7: join roots, tree 0 reads tree 1's bank
    i.raddr[0] = 1; i.raddr[16] = 1;
    i.xbar_sel[0] = 0; i.xbar_sel[1] = 16;
    i.pe_op[0][0] = PE_ADD;
    prog.push_back(i);
    i = nop();                                                                  // 8: leaf PE 0 -> bank 0, reg 2
    i.wr[0].en = 1; i.wr[0].level = 0; i.wr[0].addr = 2;
    prog.push_back(i);
    i = nop();                                                                  // 9: store results, then halt
    i.raddr[0] = 2;
    for (int j = 0; j < 4; j++) i.raddr[4*j+2] = 3;
    for (int j = 0; j < 2; j++) i.raddr[8*j+1] = 4;
    i.mem_op = MEM_STORE; i.mem_addr = 1; i.halt = 1;
    prog.push_back(i);

    run_prog(cyc);
    check(cyc == prog.size() + 1, $sformatf("SPN run took %0d cycles for %0d instructions", cyc, prog.size()));
    host_read(1, 0, d);
    check(d === A[NLEAF + NNODE - 1], $sformatf("SPN root %h, expected %h", d, A[NLEAF + NNODE - 1]));
    for (int j = 0; j < 4; j++) begin
      host_read(1, 4*j+2, d);
      check(d === A[NLEAF + node_of[0][lvl_base(1) + j]], $sformatf("level-1 node %0d = %h", j, d));
    end
    for (int j = 0; j < 2; j++) begin
      host_read(1, 8*j+1, d);
      check(d === A[NLEAF + node_of[0][lvl_base(2) + j]], $sformatf("level-2 node %0d = %h", j, d));
    end
    $display("SPN test: root %h after %0d cycles", d, cyc);
  endtask

  // ---------------------------------------------------------------------
  // Part 2: random programs against the reference model
  task automatic random_test(int n_rand);
    int cyc;
    instr_t i;
    logic [INSTR_W-1:0] v;
    for (int vv = 0; vv < BANK_DEPTH; vv++)
      for (int b = 0; b < N_BANKS; b++) host_write(2 + vv, b, (vv % 7 == 0) ? $urandom : $urandom % 32'h8000_0000);
    prog.delete();
    // fill every register: load vector r while writing vector r-1 to register r-1
    for (int r = 0; r <= BANK_DEPTH; r++) begin
      i = nop();
      if (r < BANK_DEPTH) begin i.mem_op = MEM_LOAD; i.mem_addr = DADDR_W'(2 + r); end
      if (r > 0) for (int b = 0; b < N_BANKS; b++) begin
        i.wr[b].en = 1; i.wr[b].from_mem = 1; i.wr[b].addr = RADDR_W'(r - 1); end
      prog.push_back(i);
    end
    for (int k = 0; k < n_rand; k++) begin
      for (int s = 0; s < INSTR_W; s += 32) v[s +: 32] = $urandom;
      i = instr_t'(v);
      i.halt = 0;
      case ($urandom % 4)
        0: begin i.mem_op = MEM_LOAD;  i.mem_addr = DADDR_W'(2 + $urandom % 100); end
        1: begin i.mem_op = MEM_STORE; i.mem_addr = DADDR_W'(100 + $urandom % 100); end
        default: i.mem_op = MEM_NONE;
      endcase
      prog.push_back(i);
    end
    // dump every register to vectors 300..363
    for (int r = 0; r < BANK_DEPTH; r++) begin
      i = nop();
      for (int b = 0; b < N_BANKS; b++) i.raddr[b] = RADDR_W'(r);
      i.mem_op = MEM_STORE; i.mem_addr = DADDR_W'(300 + r);
      i.halt = (r == BANK_DEPTH - 1);
      prog.push_back(i);
    end
    run_prog(cyc);
    check(cyc == prog.size() + 1, $sformatf("random run took %0d cycles for %0d instructions", cyc, prog.size()));
    compare_vectors(100, 199, "random stores");
    compare_vectors(300, 300 + BANK_DEPTH - 1, "register dump");
  endtask

  initial begin
    imem_wdata = '0;
    for (int v = 0; v < DMEM_DEPTH; v++) for (int b = 0; b < N_BANKS; b++) m_dm[v][b] = '0;
    for (int t = 0; t < N_TREES; t++) for (int p = 0; p < TREE_PES; p++) m_pe[t][p] = '0;
    for (int b = 0; b < N_BANKS; b++) m_ld[b] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // clear the data-memory vectors the test reads back
    for (int v = 0; v < 400; v++) for (int b = 0; b < N_BANKS; b++) host_write(v, b, '0);
    spn_test();
    random_test(300);

    check(n_load > 0,  "no vector load");
    check(n_store > 0, "no vector store");
    check(n_wr_mem > 0, "no register write from memory");
    for (int l = 0; l < TREE_LEVELS; l++) check(n_wr_lvl[l] > 0, $sformatf("no write from level %0d", l));
    check(n_cross > 0, "no read across trees");
    for (int o = 0; o < 4; o++) check(n_op[o] > 0, $sformatf("PE operation %0d never used", o));
    check(n_sat > 0, "no saturated result");
    check(n_halt == 2, $sformatf("%0d halts", n_halt));
    $display("mechanisms: load=%0d store=%0d wr_mem=%0d wr_lvl=%0d/%0d/%0d/%0d cross=%0d add=%0d mul=%0d pass_a=%0d pass_b=%0d sat=%0d halt=%0d",
             n_load, n_store, n_wr_mem, n_wr_lvl[0], n_wr_lvl[1], n_wr_lvl[2], n_wr_lvl[3], n_cross,
             n_op[0], n_op[1], n_op[2], n_op[3], n_sat, n_halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
