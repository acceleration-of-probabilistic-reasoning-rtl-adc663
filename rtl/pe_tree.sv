// pe_tree: a binary tree of processing elements.
//
// LEVELS levels of PEs: 2**(LEVELS-1) leaf PEs take pairs of the 2**LEVELS
// tree inputs (leaf i reads in_data[2i] and in_data[2i+1]); PE j of level l>0
// reads the registered outputs of PEs 2j and 2j+1 of level l-1. Intermediate
// results therefore pass up the tree without a trip through the register
// file. The default of 4 levels gives 15 PEs and 16 inputs per tree.
//
// PEs and their operations are numbered level by level: level 0 (leaves)
// first, then level 1, and so on, the root last; level l starts at index
// 2**LEVELS - 2**(LEVELS-l). Every PE takes the operation in ops for the
// cycle it computes in, so a value entering the leaves in cycle t is combined
// by level l in cycle t+l (each instruction configures all levels for its own
// cycle; the schedule of operand arrival is left to the program). All PE
// outputs are registered and exported on pe_out for register-file writeback.
module pe_tree #(
  parameter int LEVELS = spn_pkg::TREE_LEVELS,
  parameter int DATA_W = spn_pkg::DATA_W,
  parameter int FRAC_W = spn_pkg::FRAC_W,
  localparam int NIN   = 2 ** LEVELS,
  localparam int NPE   = 2 ** LEVELS - 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic   [NIN-1:0][DATA_W-1:0] in_data,
  input  spn_pkg::pe_op_e [NPE-1:0]    ops,
  output logic   [NPE-1:0][DATA_W-1:0] pe_out
);

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int NL   = NIN >> (l + 1);  // PEs in this level
    localparam int BASE = NIN - (NIN >> l);
    for (genvar j = 0; j < NL; j++) begin : g_pe
      logic [DATA_W-1:0] opa, opb;
      if (l == 0) begin : g_leaf
        assign opa = in_data[2*j];
        assign opb = in_data[2*j+1];
      end else begin : g_inner
        localparam int PBASE = NIN - (NIN >> (l - 1));
        assign opa = pe_out[PBASE + 2*j];
        assign opb = pe_out[PBASE + 2*j + 1];
      end
      pe #(.DATA_W(DATA_W), .FRAC_W(FRAC_W)) u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .op   (ops[BASE + j]),
        .a    (opa),
        .b    (opb),
        .y    (pe_out[BASE + j])
      );
    end
  end

endmodule
