// tb_mlet_stage_sweep -- enabled-cell (power) comparison of stage
// configurations of the multistage TCAM.
//
// Nine MSTCAMs of 256 rows hold the same synthetic prefix table and search
// the same 1000 addresses:
//   equal stages: 1x32 (the conventional single-stage TCAM), 2x16, 4x8,
//   8x4, 16x2, 32x1; and unequal splits 2+30, 3+13+16 and 2+6+8+16.
// For each configuration the test sums the enabled cells of every search
// (EPS) and reports POF = 100 * (1 - sum EPS / (searches * rows * 32)).
// Checks: all configurations give identical match lines for every address;
// the single-stage TCAM enables every cell (POF 0); and each halving of the
// equal stage width never enables more cells than the coarser split.
// The table is synthetic, not a real backbone table: prefix
// lengths 8..32, most of them 16..24, grouped around 16 base networks so that
// many rows share their leading bits.
module tb_mlet_stage_sweep;
  localparam int ROWS = 256;
  localparam int NC   = 9;
  localparam int KS [NC] = '{1, 2, 4, 8, 16, 32, 2, 3, 4};
  localparam int unsigned W1 [1]  = '{32};
  localparam int unsigned W2 [2]  = '{16, 16};
  localparam int unsigned W4 [4]  = '{default: 8};
  localparam int unsigned W8 [8]  = '{default: 4};
  localparam int unsigned W16 [16] = '{default: 2};
  localparam int unsigned W32 [32] = '{default: 1};
  localparam int unsigned U2 [2]  = '{2, 30};
  localparam int unsigned U3 [3]  = '{3, 13, 16};
  localparam int unsigned U4 [4]  = '{2, 6, 8, 16};

  logic clk = 0, rst_n = 0;
  logic clear = 0, wr_en = 0, start = 0;
  logic [7:0] wr_row = 0;
  logic [31:0] wr_value = 0, wr_care = 0, key = 0;
  logic [NC-1:0] busy, ml_valid;
  logic [ROWS-1:0] ml [NC];
  longint eps [NC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(1),  .STAGE_W(W1))  c0 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[0]), .ml_valid(ml_valid[0]), .ml(ml[0]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(2),  .STAGE_W(W2))  c1 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[1]), .ml_valid(ml_valid[1]), .ml(ml[1]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(4),  .STAGE_W(W4))  c2 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[2]), .ml_valid(ml_valid[2]), .ml(ml[2]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(8),  .STAGE_W(W8))  c3 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[3]), .ml_valid(ml_valid[3]), .ml(ml[3]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(16), .STAGE_W(W16)) c4 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[4]), .ml_valid(ml_valid[4]), .ml(ml[4]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(32), .STAGE_W(W32)) c5 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[5]), .ml_valid(ml_valid[5]), .ml(ml[5]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(2),  .STAGE_W(U2))  c6 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[6]), .ml_valid(ml_valid[6]), .ml(ml[6]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(3),  .STAGE_W(U3))  c7 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[7]), .ml_valid(ml_valid[7]), .ml(ml[7]));
  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(4),  .STAGE_W(U4))  c8 (.clk, .rst_n, .clear, .wr_en, .wr_row, .wr_value, .wr_care, .wr_valid(1'b1), .start, .key, .busy(busy[8]), .ml_valid(ml_valid[8]), .ml(ml[8]));

  // Enabled cells per cycle of each configuration.
  always @(posedge clk) begin
    for (int s = 0; s < 1;  s++) eps[0] += $countones(c0.es_stage[s]) * 32;
    for (int s = 0; s < 2;  s++) eps[1] += $countones(c1.es_stage[s]) * 16;
    for (int s = 0; s < 4;  s++) eps[2] += $countones(c2.es_stage[s]) * 8;
    for (int s = 0; s < 8;  s++) eps[3] += $countones(c3.es_stage[s]) * 4;
    for (int s = 0; s < 16; s++) eps[4] += $countones(c4.es_stage[s]) * 2;
    for (int s = 0; s < 32; s++) eps[5] += $countones(c5.es_stage[s]);
    for (int s = 0; s < 2;  s++) eps[6] += $countones(c6.es_stage[s]) * U2[s];
    for (int s = 0; s < 3;  s++) eps[7] += $countones(c7.es_stage[s]) * U3[s];
    for (int s = 0; s < 4;  s++) eps[8] += $countones(c8.es_stage[s]) * U4[s];
  end

  initial begin
    #100000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pmask(input int len);
    return (len == 0) ? 32'h0 : ~32'h0 << (32 - len);
  endfunction

  logic [31:0] tv [ROWS], tc [ROWS];
  int searches = 0;

  initial begin
    logic [31:0] base [16];
    for (int c = 0; c < NC; c++) eps[c] = 0;
    for (int i = 0; i < 16; i++) base[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      int l;
      l = ($urandom % 4 == 0) ? 8 + $urandom % 25 : 16 + $urandom % 9;
      tc[r] = pmask(l);
      tv[r] = (base[$urandom % 16] ^ ($urandom & ~pmask(l - 4 < 0 ? 0 : l - 4))) & tc[r];
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r); wr_value = tv[r]; wr_care = tc[r];
    end
    @(negedge clk); wr_en = 0;
    repeat (2) @(negedge clk);
    for (int c = 0; c < NC; c++) eps[c] = 0;
    for (int t = 0; t < 1000; t++) begin
      int r;
      r = $urandom % ROWS;
      @(negedge clk);
      start = 1;
      key = (t % 10 == 0) ? $urandom : (tv[r] | ($urandom & ~tc[r]));
      @(negedge clk); start = 0;
      while (busy != '0) @(negedge clk);
      searches++;
      for (int c = 1; c < NC; c++) begin
        checks++;
        if (ml[c] !== ml[0]) begin failures++; $display("config %0d differs on %h", c, key); end
      end
    end
    for (int c = 0; c < NC; c++)
      $display("%0d stage(s) %s: mean EPS %0d of %0d cells, POF %0d%%", KS[c], c < 6 ? "equal" : "unequal",
               eps[c] / searches, ROWS * 32, 100 - (100 * eps[c]) / (searches * ROWS * 32));
    checks++;
    if (eps[0] != longint'(searches) * ROWS * 32) begin failures++; $display("single stage not fully enabled"); end
    for (int c = 1; c < 6; c++) begin
      checks++;
      if (eps[c] > eps[c-1]) begin failures++; $display("finer split enabled more cells (%0d)", KS[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
