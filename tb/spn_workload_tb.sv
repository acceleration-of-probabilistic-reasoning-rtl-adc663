// spn_workload_tb: a random sum-product network of irregular shape, compiled
// here and run on the full-size SPN processor.
//
// The network is a random DAG over NLEAF leaf probabilities with NOPS sum or
// product nodes, each reading two earlier nodes (mostly recent ones, as in
// learned SPNs); the last node is the root. A small greedy list scheduler in
// this testbench turns it into VLIW instructions:
//   * leaves are loaded by vector loads, leaf k into bank k%32, register k/32;
//   * each cycle, ready operations go to free leaf PEs, as long as no two
//     operands need different registers of one bank (one read port per bank);
//     an operation that combines the previous-cycle results of two sibling
//     PEs is placed on their parent PE instead, so it never touches the
//     register file (tree reuse, at levels 1 to 3);
//   * a result that still has unscheduled consumers is written, the cycle
//     after it is computed, into the least-filled bank its PE can reach;
//     registers are freed after their last read;
//   * the root is stored to the data memory, then the run halts.
// The root read back by the host must equal the network evaluated here as a
// list of operations, the run must take one clock per instruction plus one,
// and the tree levels above the leaves must have been used. The achieved
// operations per cycle are printed.
module spn_workload_tb;
  import spn_pkg::*;

  localparam int NLEAF = 512;
  localparam int NOPS  = 600;
  localparam int NN    = NLEAF + NOPS;
  localparam int OUT_V = 500;               // result vector

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: FAIL %s", $time, msg); end
  endtask

  function automatic word_t f_op(pe_op_e o, word_t x, word_t z);
    logic [63:0] s, p;
    s = {32'd0, x} + {32'd0, z};
    p = ({32'd0, x} * {32'd0, z}) >> FRAC_W;
    case (o)
      PE_ADD:  return (s[63:32] != 0) ? '1 : s[31:0];
      default: return (p[63:32] != 0) ? '1 : p[31:0];
    endcase
  endfunction

  function automatic int lvl_base(int l);
    int base = 0;
    for (int k = 0; k < l; k++) base += (TREE_INPUTS / 2) >> k;
    return base;
  endfunction

  // ---- the network ---------------------------------------------------------
  word_t  A [NN];
  pe_op_e O [NN];
  int     Bo [NN], Co [NN];
  int     n_cons [NN];                       // consumers not yet issued

  // ---- scheduler state -----------------------------------------------------
  int  loc_bank [NN], loc_reg [NN];
  int  ready_at [NN];                        // first cycle it can be read (-1: not in a bank)
  bit  issued [NN];
  bit  reg_busy [N_BANKS][BANK_DEPTH];
  int  n_free [N_BANKS];
  // op placed on each PE in the previous and the current cycle (-1: none)
  int  prev_op [N_TREES][TREE_PES], cur_op [N_TREES][TREE_PES];
  int  placed_lvl [TREE_LEVELS];
  instr_t prog [$];

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    for (int t = 0; t < N_TREES; t++)
      for (int p = 0; p < TREE_PES; p++) i.pe_op[t][p] = PE_PASS_A;
    return i;
  endfunction

  function automatic int alloc_reg(int b);
    for (int r = 0; r < BANK_DEPTH; r++)
      if (!reg_busy[b][r]) begin reg_busy[b][r] = 1; n_free[b]--; return r; end
    return -1;
  endfunction

  function automatic void free_reg(int k);
    reg_busy[loc_bank[k]][loc_reg[k]] = 0;
    n_free[loc_bank[k]]++;
  endfunction

  // Read of node k in this cycle: is its bank free, or reading the same register?
  function automatic bit can_read(int k, ref int raddr_use [N_BANKS]);
    return raddr_use[loc_bank[k]] < 0 || raddr_use[loc_bank[k]] == loc_reg[k];
  endfunction

  task automatic build_network();
    int pool [$];
    for (int k = 0; k < NLEAF; k++) begin
      A[k] = 32'h4000_0000 + ($urandom % 32'h4000_0000);   // in [0.5, 1)
      n_cons[k] = 0;
      pool.push_back(k);
    end
    for (int k = NLEAF; k < NN; k++) begin
      int span = (k < 200) ? k : 200;
      if (pool.size() >= 2 && ($urandom % 4) != 0) begin
        // mostly tree-like: combine two nodes that have no consumer yet
        int p = $urandom % ((pool.size() > 8) ? 8 : pool.size() - 1);
        Bo[k] = pool[p]; Co[k] = pool[p + 1];
        pool.delete(p + 1); pool.delete(p);
      end else begin
        // sometimes reuse an earlier node (a shared sub-graph)
        Bo[k] = k - 1 - ($urandom % span);
        do Co[k] = k - 1 - ($urandom % span); while (Co[k] == Bo[k]);
      end
      pool.push_back(k);
      // keep values in a useful range: add small operands, multiply large ones
      O[k] = ({1'b0, A[Bo[k]]} + {1'b0, A[Co[k]]} < 33'h8000_0000) ? PE_ADD : PE_MUL;
      A[k] = f_op(O[k], A[Bo[k]], A[Co[k]]);
      n_cons[Bo[k]]++; n_cons[Co[k]]++;
      n_cons[k] = 0;
    end
  endtask

  // Find an unissued op combining exactly the values x and y.
  function automatic int find_combiner(int x, int y);
    if (x < 0 || y < 0) return -1;
    for (int z = NLEAF; z < NN; z++)
      if (!issued[z] && ((Bo[z] == x && Co[z] == y) || (Bo[z] == y && Co[z] == x))) return z;
    return -1;
  endfunction

  // Place op z on leaf PE j of tree t if its operands can be read this
  // cycle; if both sit in one bank, forward one of them to another bank
  // instead. Returns 1 when the PE was used.
  function automatic bit try_place(int z, int t, int j, ref instr_t i, ref int raddr_use [N_BANKS],
                                   ref int to_free [$], ref int to_copy [$]);
    int b, cc, c;
    c = cyc_now;
    b = Bo[z]; cc = Co[z];
    if (ready_at[b] < 0 || ready_at[b] > c || ready_at[cc] < 0 || ready_at[cc] > c) return 0;
    if (!can_read(b, raddr_use)) return 0;
    if (loc_bank[b] == loc_bank[cc] && loc_reg[b] != loc_reg[cc]) begin
      // both operands sit in one bank: move b to another bank first,
      // forwarding it through this leaf PE (PASS_A)
      raddr_use[loc_bank[b]] = loc_reg[b];
      cur_op[t][j] = -b - 2;
      i.pe_op[t][j] = PE_PASS_A;
      i.xbar_sel[t*TREE_INPUTS + 2*j]     = XSEL_W'(loc_bank[b]);
      i.xbar_sel[t*TREE_INPUTS + 2*j + 1] = XSEL_W'(loc_bank[b]);
      i.raddr[loc_bank[b]] = RADDR_W'(loc_reg[b]);
      to_copy.push_back(b);
      ready_at[b] = -1;
      n_copies++;
      return 1;
    end
    if (!can_read(cc, raddr_use)) return 0;
    raddr_use[loc_bank[b]]  = loc_reg[b];
    raddr_use[loc_bank[cc]] = loc_reg[cc];
    issued[z] = 1; cur_op[t][j] = z;
    n_cons[b]--; n_cons[cc]--;
    if (n_cons[b] == 0) to_free.push_back(b);
    if (n_cons[cc] == 0 && cc != b) to_free.push_back(cc);
    i.pe_op[t][j] = O[z];
    i.xbar_sel[t*TREE_INPUTS + 2*j]     = XSEL_W'(loc_bank[b]);
    i.xbar_sel[t*TREE_INPUTS + 2*j + 1] = XSEL_W'(loc_bank[cc]);
    i.raddr[loc_bank[b]]  = RADDR_W'(loc_reg[b]);
    i.raddr[loc_bank[cc]] = RADDR_W'(loc_reg[cc]);
    placed_lvl[0]++;
    return 1;
  endfunction

  int n_instr_compute, n_copies, cyc_now;

  task automatic compile();
    instr_t i;
    int nv, c, root;
    int raddr_use [N_BANKS];
    bit written [N_BANKS];
    root = NN - 1;
    for (int b = 0; b < N_BANKS; b++) begin
      n_free[b] = BANK_DEPTH;
      for (int r = 0; r < BANK_DEPTH; r++) reg_busy[b][r] = 0;
    end
    for (int k = 0; k < NN; k++) begin issued[k] = (k < NLEAF); ready_at[k] = -1; end
    // load phase
    nv = (NLEAF + N_BANKS - 1) / N_BANKS;
    for (int v = 0; v <= nv; v++) begin
      i = nop();
      if (v < nv) begin i.mem_op = MEM_LOAD; i.mem_addr = DADDR_W'(v); end
      if (v > 0) for (int b = 0; b < N_BANKS; b++) begin
        i.wr[b].en = 1; i.wr[b].from_mem = 1; i.wr[b].addr = RADDR_W'(v - 1); end
      prog.push_back(i);
    end
    for (int k = 0; k < NLEAF; k++) begin
      loc_bank[k] = k % N_BANKS; loc_reg[k] = k / N_BANKS; ready_at[k] = 0;
      reg_busy[loc_bank[k]][loc_reg[k]] = 1; n_free[loc_bank[k]]--;
    end
    for (int t = 0; t < N_TREES; t++) for (int p = 0; p < TREE_PES; p++) prev_op[t][p] = -1;
    // compute phase: cycle c is instruction prog.size()
    c = 0;
    forever begin
      int to_free [$];
      int to_copy [$];
      i = nop();
      cyc_now = c;
      for (int b = 0; b < N_BANKS; b++) begin raddr_use[b] = -1; written[b] = 0; end
      for (int t = 0; t < N_TREES; t++) for (int p = 0; p < TREE_PES; p++) cur_op[t][p] = -1;
      // root readable: store it and stop
      if (ready_at[root] >= 0 && ready_at[root] <= c) begin
        i.raddr[loc_bank[root]] = RADDR_W'(loc_reg[root]);
        i.mem_op = MEM_STORE; i.mem_addr = DADDR_W'(OUT_V); i.halt = 1;
        prog.push_back(i);
        break;
      end
      // 1. inner PEs take ops on the previous-cycle results of their children
      for (int t = 0; t < N_TREES; t++)
        for (int l = 1; l < TREE_LEVELS; l++)
          for (int j = 0; j < (TREE_INPUTS >> (l + 1)); j++) begin
            int x = prev_op[t][lvl_base(l-1) + 2*j], y = prev_op[t][lvl_base(l-1) + 2*j + 1];
            int z = find_combiner(x, y);
            if (z >= 0) begin
              issued[z] = 1; n_cons[x]--; n_cons[y]--;
              cur_op[t][lvl_base(l) + j] = z;
              i.pe_op[t][lvl_base(l) + j] = O[z];
              placed_lvl[l]++;
            end
          end
      // 2. write last cycle's results that are still needed (or the root)
      for (int l = 0; l < TREE_LEVELS; l++)
        for (int t = 0; t < N_TREES; t++)
          for (int j = 0; j < (TREE_INPUTS >> (l + 1)); j++) begin
            int k = prev_op[t][lvl_base(l) + j];
            int avoid = -1;
            if (k < -1) begin k = -k - 2; avoid = loc_bank[k]; end   // a copy lands elsewhere
            if (k >= 0 && (n_cons[k] > 0 || k == root)) begin
              int best = -1, span = 2 << l, b0 = t * BANKS_PER_TREE + j * span;
              for (int b = b0; b < b0 + span; b++)
                if (!written[b] && b != avoid && n_free[b] > 0 && (best < 0 || n_free[b] > n_free[best])) best = b;
              if (best < 0) begin $display("no bank for node %0d", k); failures++; return; end
              written[best] = 1;
              loc_bank[k] = best; loc_reg[k] = alloc_reg(best); ready_at[k] = c + 1;
              i.wr[best].en = 1; i.wr[best].level = LVL_W'(l); i.wr[best].addr = RADDR_W'(loc_reg[k]);
            end
          end
      // 3. leaf PEs take ready ops; an odd PE first looks for the other
      //    operand of a consumer of its even sibling's op, so that the
      //    consumer can go on the parent PE in the next cycle
      for (int t = 0; t < N_TREES; t++)
        for (int j = 0; j < TREE_INPUTS / 2; j++) begin
          bit done_pe;
          int x;
          if (cur_op[t][j] >= 0) continue;
          done_pe = 0;
          x = (j % 2 == 1) ? cur_op[t][j-1] : -1;
          if (x >= NLEAF)
            for (int w = NLEAF; w < NN && !done_pe; w++) begin
              int y;
              if (issued[w] || (Bo[w] != x && Co[w] != x)) continue;
              y = (Bo[w] == x) ? Co[w] : Bo[w];
              if (y >= NLEAF && !issued[y]) done_pe = try_place(y, t, j, i, raddr_use, to_free, to_copy);
            end
          for (int z = NLEAF; z < NN && !done_pe; z++)
            if (!issued[z]) done_pe = try_place(z, t, j, i, raddr_use, to_free, to_copy);
        end
      // registers whose last reader was just issued can be reused from now on
      foreach (to_free[q]) if (ready_at[to_free[q]] >= 0) free_reg(to_free[q]);
      foreach (to_copy[q]) free_reg(to_copy[q]);
      prev_op = cur_op;
      prog.push_back(i);
      c++;
      if (prog.size() >= IMEM_DEPTH) begin
        $display("program too long");
        for (int z = NLEAF; z < NN; z++) if (!issued[z]) begin
          $display("first waiting op %0d: B=%0d ready %0d bank %0d, C=%0d ready %0d bank %0d", z, Bo[z], ready_at[Bo[z]], loc_bank[Bo[z]], Co[z], ready_at[Co[z]], loc_bank[Co[z]]);
          break;
        end
        failures++; return;
      end
    end
    n_instr_compute = c;
  endtask

  initial begin
    int cyc;
    word_t d;
    real opc;
    imem_wdata = '0;
    for (int l = 0; l < TREE_LEVELS; l++) placed_lvl[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    build_network();
    compile();
    // leaves into the data memory
    for (int k = 0; k < NLEAF; k++) begin
      @(negedge clk);
      h_en = 1; h_we = 1; h_addr = {DADDR_W'(k / N_BANKS), XSEL_W'(k % N_BANKS)}; h_wdata = A[k];
    end
    foreach (prog[k]) begin
      @(negedge clk);
      h_en = 0; h_we = 0;
      imem_we = 1; imem_waddr = IADDR_W'(k); imem_wdata = prog[k];
    end
    @(negedge clk);
    imem_we = 0; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == prog.size() + 1, $sformatf("run took %0d cycles for %0d instructions", cyc, prog.size()));
    @(negedge clk);
    h_en = 1; h_we = 0; h_addr = {DADDR_W'(OUT_V), XSEL_W'(loc_bank[NN-1])};
    @(negedge clk);
    h_en = 0; d = h_rdata;
    check(d === A[NN-1], $sformatf("root %h, expected %h", d, A[NN-1]));
    check(A[NN-1] != '0 && A[NN-1] != '1, "root value degenerate");
    check(placed_lvl[1] > 0, "no operation placed above the leaves");
    opc = real'(placed_lvl[0] + placed_lvl[1] + placed_lvl[2] + placed_lvl[3]) / real'(n_instr_compute);
    $display("network: %0d leaves, %0d operations (those feeding the root are evaluated); %0d compute instructions, %0.2f operations/cycle; placed per level %0d/%0d/%0d/%0d; %0d bank-conflict copies; root %h",
             NLEAF, NOPS, n_instr_compute, opc, placed_lvl[0], placed_lvl[1], placed_lvl[2], placed_lvl[3], n_copies, d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
