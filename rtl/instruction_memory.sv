// instruction_memory: program store of VLIW instructions.
//
// DEPTH words of WIDTH bits with one synchronous read port for the control
// unit (rdata is the word at raddr, one clock after ren) and one write port
// through which the host loads the program before starting the processor.
// Depth and the host write port are this design's own choices; the word
// width is that of one VLIW instruction.
module instruction_memory #(
  parameter int DEPTH = spn_pkg::IMEM_DEPTH,
  parameter int WIDTH = spn_pkg::INSTR_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             ren,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             wen,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wen) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (ren) rdata <= mem[raddr];
  end

endmodule
