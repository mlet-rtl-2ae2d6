// tb_mlet_minimizer -- self-checking test of the minimiser unit with the
// behavioural EMU (unminimised cover). A random 40-route table is loaded and
// built twice; the table writes must be the overlap-eliminated routes grouped
// by port in increasing port order (input order inside a port), as cubes, in
// consecutive rows after a clear, and the PRT begin/end records must point at
// each port's rows.
module tb_mlet_minimizer;
  import mlet_pkg::*;
  localparam int N = 40, ROWS = 48;
  logic clk = 0, rst_n = 0;
  logic ld_en, start, busy, done, overflow;
  logic [5:0] ld_addr, num_entries, num_kept, rows_used;
  route_t ld_route;
  logic emu_req_valid, emu_req_ready, emu_req_last, emu_rsp_valid, emu_rsp_ready, emu_rsp_last;
  route_t emu_req_route;
  cube_t  emu_rsp_cube;
  logic tbl_clear, tbl_wr_en, prt_present;
  logic [5:0] tbl_wr_row, prt_begin, prt_end;
  cube_t tbl_wr_cube;
  logic [7:0] prt_query;
  route_t tbl [N];
  cube_t exp_q [$];
  int checks = 0, failures = 0;

  function automatic logic [31:0] pmask(input int len);
    return (len == 0) ? 32'h0 : ~32'h0 << (32 - len);
  endfunction

  mlet_minimizer #(.ENTRIES(N), .ROWS(ROWS)) dut (.*);
  mlet_emu_model emu (.clk, .rst_n,
    .req_valid(emu_req_valid), .req_ready(emu_req_ready), .req_route(emu_req_route), .req_last(emu_req_last),
    .rsp_valid(emu_rsp_valid), .rsp_ready(emu_rsp_ready), .rsp_cube(emu_rsp_cube), .rsp_last(emu_rsp_last));
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build(input int n);
    route_t kept [$];
    int got = 0, cyc = 0, eb [8], ee [8];
    kept.delete(); exp_q.delete();
    for (int b = 0; b < n; b++) begin
      int best; logic [7:0] bport;
      best = -1; bport = 0;
      for (int a = 0; a < n; a++)
        if (a != b && tbl[a].len < tbl[b].len &&
            ((tbl[a].prefix ^ tbl[b].prefix) & pmask(int'(tbl[a].len))) == 0 && int'(tbl[a].len) > best) begin
          best = int'(tbl[a].len); bport = tbl[a].port;
        end
      if (!(best >= 0 && bport == tbl[b].port)) kept.push_back(tbl[b]);
    end
    for (int q = 0; q < 8; q++) begin
      eb[q] = -1; ee[q] = -1;
      foreach (kept[i]) if (kept[i].port == q) begin
        if (eb[q] < 0) eb[q] = exp_q.size();
        ee[q] = exp_q.size();
        exp_q.push_back(route_to_cube(kept[i]));
      end
    end
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ld_en = 1; ld_addr = 6'(i); ld_route = tbl[i];
    end
    @(negedge clk); ld_en = 0; start = 1; num_entries = 6'(n);
    @(negedge clk); start = 0;
    while (!done && cyc < 100000) begin
      #1;
      if (tbl_wr_en) begin
        checks++;
        if (got >= exp_q.size() || int'(tbl_wr_row) != got || tbl_wr_cube !== exp_q[got]) begin
          failures++; $display("row write %0d: row %0d port %0d unexpected", got, tbl_wr_row, tbl_wr_cube.port);
        end
        got++;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (!done || got != exp_q.size() || int'(num_kept) != kept.size() || int'(rows_used) != got) begin
      failures++; $display("build: done=%b rows %0d exp %0d kept %0d", done, got, exp_q.size(), num_kept);
    end
    for (int q = 0; q < 8; q++) begin
      prt_query = 8'(q); #1; checks++;
      if (prt_present !== (eb[q] >= 0) || (eb[q] >= 0 && (int'(prt_begin) != eb[q] || int'(prt_end) != ee[q]))) begin
        failures++; $display("PRT %0d: %b %0d..%0d exp %0d..%0d", q, prt_present, prt_begin, prt_end, eb[q], ee[q]);
      end
    end
  endtask

  initial begin
    ld_en = 0; start = 0; ld_addr = 0; num_entries = 0; ld_route = '0; prt_query = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      logic [31:0] base;
      base = $urandom;
      for (int i = 0; i < N; i++) begin
        int l;
        l = 4 + $urandom % 29;
        tbl[i].prefix = (base ^ (32'($urandom % 8) << (32 - l))) & pmask(l);
        tbl[i].len = 6'(l);
        tbl[i].port = 8'($urandom % 4 + (r == 1 ? 3 : 0));
      end
      build(r == 0 ? N : N / 2);
    end
    checks++; if (tbl_clear) failures++;
    checks++; if (emu.stalls == 0) begin failures++; $display("EMU never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
