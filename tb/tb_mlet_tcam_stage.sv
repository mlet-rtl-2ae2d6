// tb_mlet_tcam_stage -- self-checking test of one MSTCAM stage.
// Fills 16 rows of 8 ternary cells with random values and care masks, then
// applies random keys and random enable vectors and compares every match line
// with a reference model: match = enable AND (key agrees on all cared bits).
// Also checks that a disabled row never matches and that rewriting a row
// takes effect.
module tb_mlet_tcam_stage;
  localparam int ROWS = 16;
  localparam int W    = 8;

  logic clk = 0;
  logic wr_en;
  logic [3:0] wr_row;
  logic [W-1:0] wr_value, wr_care, key;
  logic [ROWS-1:0] es, match;
  int checks = 0, failures = 0;
  logic [W-1:0] mv [ROWS], mc [ROWS];

  mlet_tcam_stage #(.ROWS(ROWS), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input int r, input logic [W-1:0] v, input logic [W-1:0] c);
    @(negedge clk);
    wr_en = 1; wr_row = 4'(r); wr_value = v; wr_care = c;
    mv[r] = v & c; mc[r] = c;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    logic [ROWS-1:0] exp;
    #1;
    for (int j = 0; j < ROWS; j++) exp[j] = es[j] && (((key ^ mv[j]) & mc[j]) == 0);
    checks++;
    if (match !== exp) begin
      failures++;
      $display("mismatch key=%h es=%h match=%h exp=%h", key, es, match, exp);
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; wr_value = 0; wr_care = 0; key = 0; es = 0;
    for (int r = 0; r < ROWS; r++) begin
      // every third row is an exact row, some rows are all don't-care
      logic [W-1:0] c;
      c = (r % 3 == 0) ? '1 : ((r == 5) ? '0 : W'($urandom));
      write_row(r, W'($urandom), c);
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      // half of the keys are taken from a stored row so that matches occur
      key = (t % 2) ? W'($urandom) : (mv[$urandom % ROWS] | (W'($urandom) & ~mc[t % ROWS]));
      es  = (t % 4 == 0) ? '1 : ROWS'($urandom);
      check_all();
    end
    // disabled rows never match, even the all-don't-care row
    @(negedge clk); es = '0; key = W'($urandom); check_all();
    checks++;
    if (match != 0) failures++;
    @(negedge clk); es = '1; check_all();
    checks++;
    if (!match[5]) begin failures++; $display("all-don't-care row did not match"); end
    // rewrite a row and look for it
    write_row(7, 8'hA5, 8'hFF);
    @(negedge clk); key = 8'hA5; es = '1; check_all();
    checks++;
    if (!match[7]) begin failures++; $display("rewritten row 7 not found"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
