// spn_processor: programmable sum-product-network processor (top level).
//
// Two binary trees of 15 PEs each evaluate SPN sub-graphs; partial results
// travel up a tree through PE output registers instead of through the
// register file. Each tree writes into its own register file of 16 banks
// (leaf PEs to 2 banks each, level-1 PEs to 4, level-2 PEs to 8, the root to
// all 16). A combinational crossbar connects the read ports of all 32 banks
// to the 32 tree inputs, so any tree can consume any bank. The data memory
// (64 KB) moves one 32-word vector per load or store between itself and the
// register banks. A control unit issues one VLIW instruction per cycle from
// the instruction memory; each instruction sets every PE operation, every
// crossbar select, a read address and a write source/address for every bank,
// and an optional vector load or store.
//
// Per instruction (cycle t):
//   * every bank b is read at raddr[b]; tree input i receives bank
//     xbar_sel[i]; every PE computes its op on its operands and registers the
//     result (leaves on crossbar data, inner PEs on their children's
//     registered outputs from cycle t-1);
//   * every bank with wr.en writes, at the clock edge, either the registered
//     output of its level-wr.level PE (the value that PE computed in an
//     earlier cycle) or the data-memory load register;
//   * MEM_LOAD captures vector mem_addr into the load register; MEM_STORE
//     writes, to vector mem_addr, the word each bank reads at its raddr.
// Hence a leaf result computed in cycle t can be written in cycle t+1, a
// level-l result of operands read in cycle t can be written in cycle t+l+1
// and read back in cycle t+l+2; the program must respect these latencies.
//
// Host interface: the program is written through imem_we/imem_waddr/
// imem_wdata, inputs and results through the word-wide data-memory port
// (h_*), both only while busy is low; start begins a run at address 0, done
// pulses after the halting instruction has executed. The sizes are the
// "Ptree" configuration; the host interface, instruction encoding and
// timing details are this design's own choices (see spn_pkg).
module spn_processor
  import spn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // run control
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [IADDR_W-1:0] exec_pc,     // address of the executing instruction
  // program loading
  input  logic               imem_we,
  input  logic [IADDR_W-1:0] imem_waddr,
  input  instr_t             imem_wdata,
  // data-memory host port
  input  logic               h_en,
  input  logic               h_we,
  input  logic [HADDR_W-1:0] h_addr,
  input  logic [DATA_W-1:0]  h_wdata,
  output logic [DATA_W-1:0]  h_rdata
);

  instr_t                          ctrl;
  instr_t                          imem_rdata;
  logic                            imem_ren;
  logic [IADDR_W-1:0]              imem_raddr;

  logic [N_BANKS-1:0][DATA_W-1:0]  bank_rdata;   // read port of every bank
  logic [N_INPUTS-1:0][DATA_W-1:0] tree_in;      // crossbar outputs
  logic [N_BANKS-1:0][DATA_W-1:0]  ld_data;      // data-memory load register

  // ---- control ----------------------------------------------------------
  instruction_memory #(.DEPTH(IMEM_DEPTH), .WIDTH(INSTR_W)) u_imem (
    .clk  (clk),
    .ren  (imem_ren),
    .raddr(imem_raddr),
    .rdata(imem_rdata),
    .wen  (imem_we),
    .waddr(imem_waddr),
    .wdata(imem_wdata)
  );

  control_unit #(.IMEM_DEPTH(IMEM_DEPTH)) u_cu (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .busy      (busy),
    .done      (done),
    .imem_ren  (imem_ren),
    .imem_raddr(imem_raddr),
    .imem_rdata(imem_rdata),
    .ctrl      (ctrl),
    .exec_pc   (exec_pc)
  );

  // ---- crossbar ---------------------------------------------------------
  crossbar #(.N_IN(N_BANKS), .N_OUT(N_INPUTS), .DATA_W(DATA_W)) u_xbar (
    .in_data (bank_rdata),
    .sel     (ctrl.xbar_sel),
    .out_data(tree_in)
  );

  // ---- PE trees and their private register files ------------------------
  for (genvar t = 0; t < N_TREES; t++) begin : g_tree
    localparam int B0 = t * BANKS_PER_TREE;
    logic [TREE_PES-1:0][DATA_W-1:0]       pe_out;
    logic [BANKS_PER_TREE-1:0][RADDR_W-1:0] raddr, waddr;
    logic [BANKS_PER_TREE-1:0]              wen, wmem;
    logic [BANKS_PER_TREE-1:0][LVL_W-1:0]   wlvl;

    for (genvar b = 0; b < BANKS_PER_TREE; b++) begin : g_ctl
      assign raddr[b] = ctrl.raddr[B0 + b];
      assign wen[b]   = ctrl.wr[B0 + b].en;
      assign wmem[b]  = ctrl.wr[B0 + b].from_mem;
      assign wlvl[b]  = ctrl.wr[B0 + b].level;
      assign waddr[b] = ctrl.wr[B0 + b].addr;
    end

    pe_tree #(.LEVELS(TREE_LEVELS), .DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_tree (
      .clk    (clk),
      .rst_n  (rst_n),
      .in_data(tree_in[t*TREE_INPUTS +: TREE_INPUTS]),
      .ops    (ctrl.pe_op[t]),
      .pe_out (pe_out)
    );

    register_file #(
      .BANKS (BANKS_PER_TREE),
      .DEPTH (BANK_DEPTH),
      .DATA_W(DATA_W),
      .LEVELS(TREE_LEVELS)
    ) u_rf (
      .clk      (clk),
      .raddr    (raddr),
      .rdata    (bank_rdata[B0 +: BANKS_PER_TREE]),
      .wen      (wen),
      .wmem     (wmem),
      .wlvl     (wlvl),
      .waddr    (waddr),
      .pe_out   (pe_out),
      .mem_wdata(ld_data[B0 +: BANKS_PER_TREE])
    );
  end

  // ---- data memory --------------------------------------------------------
  data_memory #(.BANKS(N_BANKS), .DEPTH(DMEM_DEPTH), .DATA_W(DATA_W)) u_dmem (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (ctrl.mem_op == MEM_LOAD),
    .store  (ctrl.mem_op == MEM_STORE),
    .addr   (ctrl.mem_addr),
    .st_data(bank_rdata),
    .ld_data(ld_data),
    .h_en   (h_en),
    .h_we   (h_we),
    .h_addr (h_addr),
    .h_wdata(h_wdata),
    .h_rdata(h_rdata)
  );

  // The host owns the memories only while the processor is idle.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(busy && (imem_we || h_en)))
        else $error("spn_processor: host memory access while busy");
    end
  end

endmodule
