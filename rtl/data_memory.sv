// data_memory: banked vector data memory.
//
// BANKS banks of DEPTH words, one bank per register bank, so that a single
// vector address selects one word in every bank and a load or store moves a
// whole register-file-wide vector (BANKS x DATA_W bits) at once. The default
// 32 banks x 512 words x 32 bits is 64 KB.
//
// Processor port (one vector operation per cycle):
//   load  : the vector at addr is captured at the clock edge into the load
//           register ld_data, which holds it until the next load; register
//           banks copy from ld_data in later instructions.
//   store : st_data is written at addr at the clock edge.
// Host port (single words, for inputs and results while the processor is
// idle): h_addr = {vector address, bank}; h_we writes h_wdata, otherwise a
// read returns the word on h_rdata one clock later.
// Each bank is single-ported: the processor port has priority and the host
// must not access a bank in a cycle the processor uses it (checked by an
// assertion). The synchronous read with a holding load register and the host
// port are this design's own choices.
module data_memory #(
  parameter int BANKS  = spn_pkg::N_BANKS,
  parameter int DEPTH  = spn_pkg::DMEM_DEPTH,
  parameter int DATA_W = spn_pkg::DATA_W,
  localparam int AW    = $clog2(DEPTH),
  localparam int BW    = $clog2(BANKS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // processor vector port
  input  logic                         load,
  input  logic                         store,
  input  logic [AW-1:0]                addr,
  input  logic [BANKS-1:0][DATA_W-1:0] st_data,
  output logic [BANKS-1:0][DATA_W-1:0] ld_data,
  // host word port
  input  logic                         h_en,
  input  logic                         h_we,
  input  logic [AW+BW-1:0]             h_addr,
  input  logic [DATA_W-1:0]            h_wdata,
  output logic [DATA_W-1:0]            h_rdata
);

  logic [AW-1:0] h_vaddr;
  logic [BW-1:0] h_bank;
  logic [BANKS-1:0][DATA_W-1:0] h_rd_bank;
  logic [BW-1:0] h_bank_q;

  assign h_vaddr = h_addr[AW+BW-1:BW];
  assign h_bank  = h_addr[BW-1:0];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [DATA_W-1:0] mem [DEPTH];
    logic h_sel;
    assign h_sel = h_en && !load && !store && (h_bank == BW'(b));

    always_ff @(posedge clk) begin
      if (store)                mem[addr] <= st_data[b];
      else if (h_sel && h_we)   mem[h_vaddr] <= h_wdata;
    end

    always_ff @(posedge clk) begin
      if (!rst_n)      ld_data[b] <= '0;
      else if (load)   ld_data[b] <= mem[addr];
    end

    always_ff @(posedge clk) begin
      if (h_sel && !h_we) h_rd_bank[b] <= mem[h_vaddr];
    end
  end

  always_ff @(posedge clk) begin
    if (h_en && !h_we) h_bank_q <= h_bank;
  end
  assign h_rdata = h_rd_bank[h_bank_q];

  // A bank has one port: no host access while the processor moves a vector,
  // and never a load and a store together.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(load && store)) else $error("data_memory: load and store in one cycle");
      assert (!(h_en && (load || store))) else $error("data_memory: host access during a vector access");
    end
  end

endmodule
