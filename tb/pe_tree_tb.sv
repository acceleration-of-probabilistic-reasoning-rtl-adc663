// pe_tree_tb: self-checking test of a 4-level PE tree (15 PEs, 16 inputs).
// Inputs and all 15 operations change randomly every cycle; a cycle-level
// reference model kept here (one registered value per PE, leaves fed by the
// inputs, level l fed by level l-1 of the previous cycle) is compared with
// every PE output every cycle. A directed case then checks that a full
// 16-input sum/product tree reaches the root after exactly 4 clocks.
module pe_tree_tb;
  import spn_pkg::*;
  localparam int L = 4, NIN = 16, NPE = 15;
  logic clk = 0, rst_n = 0;
  logic   [NIN-1:0][31:0] in_data;
  pe_op_e [NPE-1:0]       ops;
  logic   [NPE-1:0][31:0] pe_out;
  logic   [NPE-1:0][31:0] model, nxt;
  int checks = 0, failures = 0;

  pe_tree #(.LEVELS(L)) dut (.clk(clk), .rst_n(rst_n), .in_data(in_data), .ops(ops), .pe_out(pe_out));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] f(pe_op_e o, logic [31:0] x, logic [31:0] z);
    logic [63:0] s, p;
    s = {32'd0, x} + {32'd0, z};
    p = ({32'd0, x} * {32'd0, z}) >> 31;
    case (o)
      PE_ADD:    return (s[63:32] != 0) ? '1 : s[31:0];
      PE_MUL:    return (p[63:32] != 0) ? '1 : p[31:0];
      PE_PASS_A: return x;
      default:   return z;
    endcase
  endfunction

  // index of PE j of level l
  function automatic int idx(int l, int j);
    int base = 0;
    for (int k = 0; k < l; k++) base += NIN >> (k + 1);
    return base + j;
  endfunction

  task automatic step_model();
    for (int l = 0; l < L; l++)
      for (int j = 0; j < (NIN >> (l + 1)); j++)
        if (l == 0) nxt[idx(0, j)] = f(ops[idx(0, j)], in_data[2*j], in_data[2*j+1]);
        else        nxt[idx(l, j)] = f(ops[idx(l, j)], model[idx(l-1, 2*j)], model[idx(l-1, 2*j+1)]);
    model = nxt;
  endtask

  logic [31:0] leaves [NIN];
  logic [63:0] acc;
  int lat;

  initial begin
    in_data = '0; ops = '0; model = '0;
    @(posedge clk); @(posedge clk); #1;
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      for (int i = 0; i < NIN; i++) in_data[i] = (c % 2) ? ($urandom >> 1) : $urandom;
      for (int i = 0; i < NPE; i++) ops[i] = pe_op_e'($urandom % 4);
      step_model();
      @(posedge clk); #1;
      for (int i = 0; i < NPE; i++) begin
        checks++;
        if (pe_out[i] !== model[i]) begin
          failures++;
          if (failures < 10) $display("cycle %0d PE %0d: %h exp %h", c, i, pe_out[i], model[i]);
        end
      end
    end
    // Directed: sum of 16 small values through all four levels.
    acc = 0;
    for (int i = 0; i < NIN; i++) begin
      leaves[i] = $urandom % 32'h0100_0000;
      in_data[i] = leaves[i];
      acc += leaves[i];
    end
    for (int i = 0; i < NPE; i++) ops[i] = PE_ADD;
    lat = 0;
    for (int k = 0; k < 6; k++) begin
      @(posedge clk); #1;
      lat++;
      if (pe_out[NPE-1] == acc[31:0] && lat <= 4) break;
    end
    checks++;
    if (lat != 4 || pe_out[NPE-1] !== acc[31:0]) begin
      failures++; $display("root latency %0d value %h exp %h", lat, pe_out[NPE-1], acc[31:0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
