// pe_tb: self-checking test of the processing element.
// Drives random and corner-case operands with every operation and checks the
// registered result one clock later against a reference computed here with
// 64-bit integer arithmetic (saturating sum; product shifted by 31 fraction
// bits and saturated).
module pe_tb;
  import spn_pkg::*;
  logic clk = 0, rst_n = 0;
  pe_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  pe dut (.clk(clk), .rst_n(rst_n), .op(op), .a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_model(pe_op_e o, logic [31:0] x, logic [31:0] z);
    logic [63:0] x64, z64, s, p;
    x64 = {32'd0, x};
    z64 = {32'd0, z};
    s = x64 + z64;
    p = x64 * z64;
    p = p >> 31;
    case (o)
      PE_ADD:    return (s > 64'hFFFF_FFFF) ? 32'hFFFF_FFFF : s[31:0];
      PE_MUL:    return (p > 64'hFFFF_FFFF) ? 32'hFFFF_FFFF : p[31:0];
      PE_PASS_A: return x;
      default:   return z;
    endcase
  endfunction

  logic [31:0] corner [6] = '{32'h0, 32'h8000_0000, 32'h4000_0000, 32'hFFFF_FFFF, 32'h1, 32'hC000_0000};
  logic [31:0] exp_y;

  initial begin
    op = PE_ADD; a = 0; b = 0;
    @(posedge clk); @(posedge clk);
    #1;
    checks++; if (y !== 0) begin failures++; $display("reset: y=%h", y); end
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      op = pe_op_e'(i % 4);
      if (i < 144) begin a = corner[(i/4) % 6]; b = corner[(i/24) % 6]; end
      else begin a = $urandom; b = (i % 3 == 0) ? ($urandom >> ($urandom % 32)) : $urandom; end
      exp_y = ref_model(op, a, b);
      @(posedge clk); #1;
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("op=%0d a=%h b=%h y=%h exp=%h", op, a, b, y, exp_y);
      end
    end
    // 1.0 * 0.5 = 0.5 and 0.5 + 0.25 = 0.75 in the 1.31 format
    op = PE_MUL; a = 32'h8000_0000; b = 32'h4000_0000; @(posedge clk); #1;
    checks++; if (y !== 32'h4000_0000) failures++;
    op = PE_ADD; a = 32'h4000_0000; b = 32'h2000_0000; @(posedge clk); #1;
    checks++; if (y !== 32'h6000_0000) failures++;
    // result is registered: changing inputs without a clock leaves y unchanged
    a = 0; b = 0; #2;
    checks++; if (y !== 32'h6000_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
