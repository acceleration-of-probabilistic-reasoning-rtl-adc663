// register_file: private banked register file of one PE tree.
//
// BANKS independent banks of DEPTH words, each with one read port and one
// write port and its own addresses, so every bank can be read and written at
// a different register in the same cycle. Reads are combinational (the
// crossbar and the leaf PEs follow in the same cycle); writes take effect at
// the clock edge, so a read in the same cycle returns the old word.
//
// Write sources follow the fixed mapping of tree outputs to banks: with
// BANKS = 2**LEVELS, a PE of level l (0 = leaves) can write the 2**(l+1)
// consecutive banks it sits above, i.e. bank b can be written by PE
// (b >> (l+1)) of level l, for each level; the root can write every bank of
// its tree. A bank can also be written from the data-memory load register
// (wmem), which is how a vector load lands in all banks at once. Per bank
// and cycle the instruction picks at most one source (wen, wmem, wlvl) and
// the register address (waddr); that one-write-port-per-bank choice is this
// design's own. The banks hold no reset; programs load them before use.
module register_file #(
  parameter int BANKS   = spn_pkg::BANKS_PER_TREE,
  parameter int DEPTH   = spn_pkg::BANK_DEPTH,
  parameter int DATA_W  = spn_pkg::DATA_W,
  parameter int LEVELS  = spn_pkg::TREE_LEVELS,
  localparam int NPE    = 2 ** LEVELS - 1,
  localparam int AW     = $clog2(DEPTH),
  localparam int LW     = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic                          clk,
  // read side
  input  logic [BANKS-1:0][AW-1:0]      raddr,
  output logic [BANKS-1:0][DATA_W-1:0]  rdata,
  // write side
  input  logic [BANKS-1:0]              wen,
  input  logic [BANKS-1:0]              wmem,
  input  logic [BANKS-1:0][LW-1:0]      wlvl,
  input  logic [BANKS-1:0][AW-1:0]      waddr,
  input  logic [NPE-1:0][DATA_W-1:0]    pe_out,
  input  logic [BANKS-1:0][DATA_W-1:0]  mem_wdata
);

  localparam int NIN = 2 ** LEVELS;

  initial begin
    assert (BANKS == NIN)
      else $error("register_file: BANKS (%0d) must equal 2**LEVELS (%0d)", BANKS, NIN);
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [DATA_W-1:0] mem [DEPTH];
    logic [DATA_W-1:0] wdata;
    // Candidate PE output of each level for this bank.
    logic [LEVELS-1:0][DATA_W-1:0] lvl_src;

    for (genvar l = 0; l < LEVELS; l++) begin : g_src
      localparam int BASE = NIN - (NIN >> l);
      assign lvl_src[l] = pe_out[BASE + (b >> (l + 1))];
    end

    always_comb begin
      if (wmem[b])                      wdata = mem_wdata[b];
      else if (int'(wlvl[b]) < LEVELS)  wdata = lvl_src[wlvl[b]];
      else                              wdata = lvl_src[LEVELS-1];
    end

    always_ff @(posedge clk) begin
      if (wen[b]) mem[waddr[b]] <= wdata;
    end

    assign rdata[b] = mem[raddr[b]];
  end

endmodule
