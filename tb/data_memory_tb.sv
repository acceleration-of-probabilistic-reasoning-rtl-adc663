// data_memory_tb: self-checking test of the 32-bank, 512-vector data memory.
// The host port writes random words, vector stores and loads move whole
// 32-word vectors, and host reads return single words one clock later; a
// reference copy is kept here. Also checks that the load register holds its
// vector until the next load.
module data_memory_tb;
  localparam int BANKS = 32, DEPTH = 512;
  logic clk = 0, rst_n = 0;
  logic load, store, h_en, h_we;
  logic [8:0] addr;
  logic [BANKS-1:0][31:0] st_data, ld_data, ld_exp;
  logic [13:0] h_addr;
  logic [31:0] h_wdata, h_rdata;
  logic [31:0] model [DEPTH][BANKS];
  int checks = 0, failures = 0;

  data_memory dut (.clk(clk), .rst_n(rst_n), .load(load), .store(store), .addr(addr),
                   .st_data(st_data), .ld_data(ld_data), .h_en(h_en), .h_we(h_we),
                   .h_addr(h_addr), .h_wdata(h_wdata), .h_rdata(h_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    load = 0; store = 0; h_en = 0; h_we = 0;
  endtask

  initial begin
    idle(); addr = 0; st_data = '0; h_addr = 0; h_wdata = 0;
    @(posedge clk); @(posedge clk); #1;
    rst_n = 1;
    // host fills 64 vectors
    for (int v = 0; v < 64; v++)
      for (int b = 0; b < BANKS; b++) begin
        h_en = 1; h_we = 1; h_addr = {9'(v), 5'(b)}; h_wdata = $urandom;
        model[v][b] = h_wdata;
        @(posedge clk); #1;
      end
    idle();
    for (int c = 0; c < 3000; c++) begin
      automatic int kind = $urandom % 3;
      idle();
      addr = 9'($urandom % 64);
      if (kind == 0) begin
        load = 1; ld_exp = '0;
        for (int b = 0; b < BANKS; b++) ld_exp[b] = model[addr][b];
        @(posedge clk); #1; idle();
        checks++;
        if (ld_data !== ld_exp) begin failures++; if (failures < 10) $display("load %0d mismatch", addr); end
        addr = addr + 9'd1;   // held while idle, whatever the address
        @(posedge clk); #1;
        checks++;
        if (ld_data !== ld_exp) begin failures++; $display("load register not held"); end
      end else if (kind == 1) begin
        store = 1;
        for (int b = 0; b < BANKS; b++) begin st_data[b] = $urandom; model[addr][b] = st_data[b]; end
        @(posedge clk); #1;
      end else begin
        automatic int b = $urandom % BANKS;
        h_en = 1; h_we = 0; h_addr = {addr, 5'(b)};
        @(posedge clk); #1; idle();
        checks++;
        if (h_rdata !== model[addr][b]) begin
          failures++; if (failures < 10) $display("host read %0d/%0d: %h exp %h", addr, b, h_rdata, model[addr][b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
