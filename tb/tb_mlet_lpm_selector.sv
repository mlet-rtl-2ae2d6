// tb_mlet_lpm_selector -- self-checking test of the LPM selector.
// 21 rows (not a power of two) get random prefix lengths; random match-line
// vectors are applied and the registered result is compared with a
// reference: the matching row with the largest length, lowest index on ties,
// hit=0 when nothing matches. Checks the one-cycle latency.
module tb_mlet_lpm_selector;
  localparam int ROWS = 21;
  logic clk = 0, rst_n = 0;
  logic wr_en, ml_valid, sel_valid, sel_hit;
  logic [4:0] wr_row, sel_row;
  logic [5:0] wr_len;
  logic [ROWS-1:0] ml;
  logic [5:0] lens [ROWS];
  int checks = 0, failures = 0;

  mlet_lpm_selector #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; ml_valid = 0; ml = 0; wr_row = 0; wr_len = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 5'(r); wr_len = 6'($urandom % 8 + 8 * (r % 4)); // many ties
      lens[r] = wr_len;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      logic ehit; int erow; int elen;
      @(negedge clk);
      ml_valid = 1;
      ml = (t % 7 == 0) ? '0 : ((t % 5 == 0) ? ROWS'(1) << ($urandom % ROWS) : ROWS'($urandom));
      ehit = 0; erow = 0; elen = -1;
      for (int r = 0; r < ROWS; r++)
        if (ml[r] && int'(lens[r]) > elen) begin ehit = 1; erow = r; elen = int'(lens[r]); end
      @(negedge clk);
      ml_valid = 0;
      checks++;
      if (!sel_valid || sel_hit !== ehit || (ehit && int'(sel_row) != erow)) begin
        failures++;
        $display("ml=%h got v=%b hit=%b row=%0d exp hit=%b row=%0d", ml, sel_valid, sel_hit, sel_row, ehit, erow);
      end
      @(negedge clk);
      checks++; if (sel_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
