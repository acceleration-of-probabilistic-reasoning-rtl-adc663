// pe: processing element of the SPN processor.
//
// Each cycle the PE applies one operation to its two operands and registers
// the result: a sum (ADD), a product (MUL), or a plain forward of operand a
// (PASS_A) or b (PASS_B), the last two being used to move data through a tree
// without computing. The result appears on y one clock after a and b are
// presented, and stays there until the next clock edge.
//
// As in the architecture, there is one combined +/x unit followed by a
// selector and an output register. The number format is this design's own
// choice: unsigned fixed point with FRAC_W fraction bits (the default, 31 of
// 32 bits, covers probabilities in [0, 2)). Sums saturate at the largest
// value; products are truncated to FRAC_W fraction bits and saturate as well.
// Synchronous active-low reset clears the output register.
module pe #(
  parameter int DATA_W = spn_pkg::DATA_W,
  parameter int FRAC_W = spn_pkg::FRAC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  spn_pkg::pe_op_e   op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [DATA_W-1:0] y
);

  logic [DATA_W:0]     sum;
  logic [2*DATA_W-1:0] prod;
  logic [2*DATA_W-1:0] prod_sh;
  logic [DATA_W-1:0]   sum_sat, prod_sat, result;

  always_comb begin
    sum      = {1'b0, a} + {1'b0, b};
    sum_sat  = sum[DATA_W] ? '1 : sum[DATA_W-1:0];
    prod     = {{DATA_W{1'b0}}, a} * {{DATA_W{1'b0}}, b};
    prod_sh  = prod >> FRAC_W;
    prod_sat = (|prod_sh[2*DATA_W-1:DATA_W]) ? '1 : prod_sh[DATA_W-1:0];
    unique case (op)
      spn_pkg::PE_ADD:    result = sum_sat;
      spn_pkg::PE_MUL:    result = prod_sat;
      spn_pkg::PE_PASS_A: result = a;
      spn_pkg::PE_PASS_B: result = b;
      default:   result = a;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) y <= '0;
    else        y <= result;
  end

endmodule
