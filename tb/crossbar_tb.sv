// crossbar_tb: self-checking test of the 32 x 32 read crossbar.
// Random bank data and random selects (including many outputs reading one
// bank) are applied; every output must equal the selected input in the same
// cycle, since the crossbar is purely combinational.
module crossbar_tb;
  localparam int N = 32;
  logic [N-1:0][31:0] in_data, out_data;
  logic [N-1:0][4:0]  sel;
  int checks = 0, failures = 0;

  crossbar dut (.in_data(in_data), .sel(sel), .out_data(out_data));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) in_data[i] = $urandom;
      for (int o = 0; o < N; o++) sel[o] = (t % 4 == 0) ? 5'(t % N) : 5'($urandom);
      #1;
      for (int o = 0; o < N; o++) begin
        checks++;
        if (out_data[o] !== in_data[sel[o]]) begin
          failures++;
          if (failures < 10) $display("t=%0d out %0d sel %0d: %h exp %h", t, o, sel[o], out_data[o], in_data[sel[o]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
