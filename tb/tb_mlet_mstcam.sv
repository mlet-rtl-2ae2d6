// tb_mlet_mstcam -- self-checking test of the multistage TCAM.
// A 40-row table with the unequal stage split 2/6/8/16 is filled with random
// prefix rows and some arbitrary ternary rows; a few rows are deleted. Random
// keys (many derived from stored rows) are searched and for each search the
// test checks:
//   * the match lines equal a plain full-width ternary compare of every valid
//     row (multistage enabling must not change the result);
//   * ml_valid arrives exactly NUM_STAGES cycles after start, busy meanwhile;
//   * in every stage, the enabled rows are exactly the valid rows that matched
//     all earlier stages, and only one stage is enabled per cycle.
// It also accumulates the enabled-cell count per search (EPS) and reports the
// power optimisation factor POF = 1 - sum(EPS) / (searches * rows * 32).
module tb_mlet_mstcam;
  localparam int ROWS = 40;
  localparam int K    = 4;
  localparam int unsigned SW [K] = '{2, 6, 8, 16};
  localparam int LSB [K] = '{30, 24, 16, 0};

  logic clk = 0, rst_n = 0;
  logic clear, wr_en, wr_valid, start, busy, ml_valid;
  logic [5:0] wr_row;
  logic [31:0] wr_value, wr_care, key;
  logic [ROWS-1:0] ml;
  logic [31:0] mv [ROWS], mc [ROWS];
  logic [ROWS-1:0] mvalid;
  int checks = 0, failures = 0;
  longint eps_sum = 0, searches = 0, early_drops = 0;

  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(K), .STAGE_W(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pmask(input int len);
    return (len == 0) ? 32'h0 : ~32'h0 << (32 - len);
  endfunction

  task automatic write_row(input int r, input logic [31:0] v, input logic [31:0] c, input logic vld);
    @(negedge clk);
    wr_en = 1; wr_row = 6'(r); wr_value = v; wr_care = c; wr_valid = vld;
    mv[r] = v & c; mc[r] = c; mvalid[r] = vld;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic search(input logic [31:0] k);
    logic [ROWS-1:0] exp_ml, alive;
    int cyc;
    for (int j = 0; j < ROWS; j++) exp_ml[j] = mvalid[j] && (((k ^ mv[j]) & mc[j]) == 0);
    @(negedge clk);
    start = 1; key = k;
    @(negedge clk);
    start = 0;
    alive = mvalid;
    cyc = 1;
    // one stage per cycle: check the enables of the stage being searched
    for (int s = 0; s < K; s++) begin
      logic [ROWS-1:0] next;
      checks++;
      if (!busy) begin failures++; $display("busy low in stage %0d", s); end
      for (int o = 0; o < K; o++) begin
        checks++;
        if (dut.es_stage[o] !== ((o == s) ? alive : '0)) begin
          failures++;
          $display("stage %0d cycle: ES of stage %0d = %h, expected %h", s, o, dut.es_stage[o],
                   (o == s) ? alive : '0);
        end
      end
      eps_sum += longint'($countones(dut.es_stage[s])) * SW[s];
      for (int j = 0; j < ROWS; j++)
        next[j] = alive[j] && ((((k ^ mv[j]) & mc[j]) >> LSB[s]) & ((32'h1 << SW[s]) - 1)) == 0;
      if (s < K - 1) early_drops += $countones(alive & ~next);
      alive = next;
      if (s < K - 1) begin
        checks++;
        if (ml_valid) begin failures++; $display("ml_valid too early"); end
        @(negedge clk);
        cyc++;
      end
    end
    @(negedge clk);
    checks++;
    if (!ml_valid || ml !== exp_ml || cyc != K) begin
      failures++;
      $display("key %h: ml=%h valid=%b exp=%h cycles=%0d", k, ml, ml_valid, exp_ml, cyc);
    end
    searches++;
  endtask

  initial begin
    clear = 0; wr_en = 0; wr_valid = 0; start = 0; wr_row = 0; wr_value = 0; wr_care = 0; key = 0;
    mvalid = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      if (r % 5 == 4) write_row(r, $urandom, $urandom, 1'b1);          // arbitrary cube
      else            write_row(r, $urandom, pmask($urandom % 33), 1'b1); // prefix
    end
    // related prefixes so that several rows match the same key
    write_row(0, 32'h0A00_0000, pmask(8), 1'b1);
    write_row(1, 32'h0A01_0000, pmask(16), 1'b1);
    write_row(2, 32'h0A01_0200, pmask(24), 1'b1);
    write_row(3, 32'h0A01_0203, pmask(32), 1'b1);
    write_row(6, 0, 0, 1'b0);                                           // deleted row
    for (int t = 0; t < 300; t++) begin
      logic [31:0] k;
      int r;
      r = $urandom % ROWS;
      case (t % 3)
        0: k = $urandom;
        1: k = mv[r] | ($urandom & ~mc[r]);
        default: k = 32'h0A01_0200 | ($urandom & 32'h0000_01FF);
      endcase
      search(k);
    end
    // clear invalidates every row
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; mvalid = '0;
    search(32'h0A01_0203);
    checks++; if (ml != 0) failures++;
    checks++; if (early_drops == 0) begin failures++; $display("no row was disabled early"); end
    $display("searches=%0d mean EPS=%0d of %0d cells, POF=%0d%%", searches, eps_sum / searches,
             ROWS * 32, 100 - (100 * eps_sum) / (searches * ROWS * 32));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
