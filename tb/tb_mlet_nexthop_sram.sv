// tb_mlet_nexthop_sram -- self-checking test of the next-hop SRAM.
// Writes a port number to every row, reads rows back in random order and
// checks data and the one-cycle read latency (rd_valid the cycle after rd_en).
module tb_mlet_nexthop_sram;
  localparam int ROWS = 20;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, rd_valid;
  logic [4:0] wr_addr, rd_addr;
  logic [7:0] wr_data, rd_data;
  logic [7:0] model [ROWS];
  int checks = 0, failures = 0;

  mlet_nexthop_sram #(.ROWS(ROWS), .DATA_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(r); wr_data = 8'($urandom); model[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    checks++; if (rd_valid) failures++;
    for (int t = 0; t < 100; t++) begin
      int a;
      a = $urandom % ROWS;
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (!rd_valid || rd_data !== model[a]) begin
        failures++; $display("row %0d: got %h/%b exp %h", a, rd_data, rd_valid, model[a]);
      end
      // overwrite the row we just read now and then
      if (t % 10 == 0) begin
        wr_en = 1; wr_addr = 5'(a); wr_data = 8'($urandom); model[a] = wr_data;
        @(negedge clk); wr_en = 0;
        checks++; if (rd_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
