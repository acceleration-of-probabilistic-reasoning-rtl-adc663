// crossbar: read crossbar between the register banks and the PE-tree inputs.
//
// Purely combinational, with no storage: each of the N_OUT tree inputs picks
// the read port of any of the N_IN register banks (all trees' banks together),
// which is what lets a tree consume results written into another tree's
// private register file. Several inputs may select the same bank; they then
// all see the single word that bank's one read port delivers in that cycle.
// The multiplexer-per-output structure is this design's own choice, and so
// is allowing several inputs to share one bank's word: the architecture
// forbids multiple inputs on one bank, which the single read port per bank
// already enforces for distinct registers; a program that never selects a
// bank twice sees exactly the described behaviour.
module crossbar #(
  parameter int N_IN   = spn_pkg::N_BANKS,
  parameter int N_OUT  = spn_pkg::N_INPUTS,
  parameter int DATA_W = spn_pkg::DATA_W,
  localparam int SW    = $clog2(N_IN)
) (
  input  logic [N_IN-1:0][DATA_W-1:0]  in_data,
  input  logic [N_OUT-1:0][SW-1:0]     sel,
  output logic [N_OUT-1:0][DATA_W-1:0] out_data
);

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      out_data[o] = in_data[sel[o]];
    end
  end

endmodule
