// tb_mlet_merger -- self-checking test of the merger.
// Sends PRTs of random sizes (cubes of one port per PRT, last flag on the
// final cube) and checks that each cube is written to the next table row,
// that the table is cleared at start, that the begin/end rows recorded for
// each PRT are right, and that cubes beyond the 12 table rows are dropped
// with the overflow flag raised.
module tb_mlet_merger;
  import mlet_pkg::*;
  localparam int ROWS = 12;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, in_last, tbl_clear, tbl_wr_en, overflow, prt_present;
  cube_t in_cube, tbl_wr_cube;
  logic [3:0] tbl_wr_row, prt_begin, prt_end;
  logic [4:0] rows_used, prts_merged;
  logic [7:0] prt_query;
  int checks = 0, failures = 0;
  int eb [256], ee [256];

  mlet_merger #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build(input int sizes [3], input int ports [3]);
    int row = 0;
    for (int q = 0; q < 256; q++) begin eb[q] = -1; ee[q] = -1; end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++; if (!tbl_clear) begin failures++; $display("no clear"); end
    for (int p = 0; p < 3; p++) begin
      for (int c = 0; c < sizes[p]; c++) begin
        in_valid = 1; in_last = (c == sizes[p] - 1);
        in_cube.value = $urandom; in_cube.care = $urandom; in_cube.len = 6'($urandom);
        in_cube.port = 8'(ports[p]);
        #1;
        checks++;
        if (row < ROWS) begin
          if (!tbl_wr_en || int'(tbl_wr_row) != row || tbl_wr_cube !== in_cube) begin
            failures++; $display("cube %0d of PRT %0d: wr_en=%b row=%0d", c, ports[p], tbl_wr_en, tbl_wr_row);
          end
          if (c == 0) eb[ports[p]] = row;
          ee[ports[p]] = row;
        end else if (tbl_wr_en) begin
          failures++; $display("write past the table end");
        end
        row++;
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      if ($urandom % 2) @(negedge clk);
    end
    checks++;
    if (overflow !== (row > ROWS) || int'(rows_used) != ((row > ROWS) ? ROWS : row) || prts_merged != 3) begin
      failures++; $display("overflow=%b rows_used=%0d prts=%0d", overflow, rows_used, prts_merged);
    end
    for (int q = 0; q < 8; q++) begin
      prt_query = 8'(q); #1;
      checks++;
      if (prt_present !== (eb[q] >= 0) || (eb[q] >= 0 && (int'(prt_begin) != eb[q] || int'(prt_end) != ee[q]))) begin
        failures++; $display("PRT %0d: present=%b %0d..%0d exp %0d..%0d", q, prt_present, prt_begin, prt_end, eb[q], ee[q]);
      end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_cube = '0; prt_query = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    build('{3, 1, 4}, '{0, 2, 5});
    build('{2, 5, 2}, '{1, 3, 7});
    build('{6, 5, 4}, '{0, 1, 2});   // 15 cubes into 12 rows: overflow
    build('{1, 1, 1}, '{4, 6, 7});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
