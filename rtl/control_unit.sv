// control_unit: instruction sequencer of the SPN processor.
//
// After a start pulse the control unit fetches the VLIW program from address
// 0 of the instruction memory, one instruction per clock, and presents each
// fetched instruction as the control word of the datapath for exactly one
// cycle: PE operations, crossbar selects, register read/write controls and
// the data-memory operation. An instruction whose halt bit is set is executed
// and ends the run: busy falls and done pulses for one cycle.
//
// Timing: start in cycle t issues the fetch of address 0; instruction k
// executes in cycle t+1+k (the instruction memory read takes one clock and
// is overlapped with execution). Outside a run the control word is a no-op:
// no register write and no memory operation (PE and crossbar fields still
// pass through; PE results are simply not written anywhere). No hazard
// interlock is provided: as in the architecture, the program (its compiler)
// is responsible for the pipeline latency of the PE trees. The two-state
// sequencer and the halt bit are this design's own choices. Most control
// word bits are the fetched instruction bits unchanged (a VLIW word needs no
// decoding); only register writes and memory operations are gated.
module control_unit #(
  parameter int IMEM_DEPTH = spn_pkg::IMEM_DEPTH,
  localparam int AW        = $clog2(IMEM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // instruction memory read port
  output logic          imem_ren,
  output logic [AW-1:0] imem_raddr,
  input  spn_pkg::instr_t imem_rdata,
  // control word of the datapath for this cycle
  output spn_pkg::instr_t ctrl,
  output logic [AW-1:0] exec_pc
);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e        state;
  logic [AW-1:0] pc;       // address of the next instruction to fetch
  logic          exec;

  assign exec = (state == S_RUN);
  assign busy = exec;

  always_comb begin
    imem_ren   = 1'b0;
    imem_raddr = pc;
    if (state == S_IDLE) begin
      imem_ren   = start;
      imem_raddr = '0;
    end else begin
      imem_ren   = !imem_rdata.halt;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      done    <= 1'b0;
      exec_pc <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          pc      <= AW'(1);
          exec_pc <= '0;
        end
        S_RUN: begin
          if (imem_rdata.halt) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            pc      <= pc + AW'(1);
            exec_pc <= pc;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Control word: the fetched instruction while running, else a no-op.
  always_comb begin
    ctrl = imem_rdata;
    if (!exec) begin
      ctrl.halt   = 1'b0;
      ctrl.mem_op = spn_pkg::MEM_NONE;
      for (int b = 0; b < spn_pkg::N_BANKS; b++) ctrl.wr[b].en = 1'b0;
    end
  end

  // A start while running is ignored; flag it.
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(start && exec)) else $warning("control_unit: start while busy ignored");
  end

endmodule
