// tb_mlet_overlap_elim -- self-checking test of overlap elimination.
// Random tables of up to 48 routes are built around a few base addresses so
// that many routes have parents; ports are drawn from {0,1,2}. A reference
// model finds each route's parent (the longest strictly shorter route whose
// bits agree over its length) and keeps the route unless that parent has the
// same port. The test compares the output stream, in order, with the
// reference list, checks num_kept and that the scan time stays within
// (n+8)*n+20 cycles (n+3 per route plus output stalls).
module tb_mlet_overlap_elim;
  import mlet_pkg::*;
  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  logic ld_en, start, busy, done, out_valid, out_ready;
  logic [5:0] ld_addr, num_entries, num_kept;
  route_t ld_route, out_route;
  route_t tbl [N];
  route_t exp_q [$];
  int checks = 0, failures = 0, removed_total = 0;

  mlet_overlap_elim #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pmask(input int len);
    return (len == 0) ? 32'h0 : ~32'h0 << (32 - len);
  endfunction

  task automatic run(input int n);
    int cyc, got;
    exp_q.delete();
    for (int b = 0; b < n; b++) begin
      int best; logic [7:0] bport;
      best = -1; bport = 0;
      for (int a = 0; a < n; a++)
        if (a != b && tbl[a].len < tbl[b].len &&
            ((tbl[a].prefix ^ tbl[b].prefix) & pmask(int'(tbl[a].len))) == 0 &&
            int'(tbl[a].len) > best) begin
          best = int'(tbl[a].len); bport = tbl[a].port;
        end
      if (!(best >= 0 && bport == tbl[b].port)) exp_q.push_back(tbl[b]);
    end
    removed_total += n - exp_q.size();
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ld_en = 1; ld_addr = 6'(i); ld_route = tbl[i];
    end
    @(negedge clk); ld_en = 0;
    start = 1; num_entries = 6'(n);
    @(negedge clk); start = 0;
    cyc = 0; got = 0;
    while (!done && cyc < (n + 8) * n + 20) begin
      out_ready = ($urandom % 4 != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (got >= exp_q.size() || out_route !== exp_q[got]) begin
          failures++;
          $display("output %0d: %h/%0d->%0d unexpected", got, out_route.prefix, out_route.len, out_route.port);
        end
        got++;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (!done || got != exp_q.size() || num_kept != 6'(exp_q.size())) begin
      failures++;
      $display("n=%0d: done=%b got=%0d exp=%0d kept=%0d cycles=%0d", n, done, got, exp_q.size(), num_kept, cyc);
    end
  endtask

  initial begin
    ld_en = 0; start = 0; out_ready = 1; ld_addr = 0; num_entries = 0; ld_route = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the paper's example of an identical parent: 10.0.0.0/8 -> 1 makes
    // 10.1.0.0/16 -> 1 redundant, but not 10.1.2.0/24 -> 2
    tbl[0] = '{prefix: 32'h0A00_0000, len: 8,  port: 1};
    tbl[1] = '{prefix: 32'h0A01_0000, len: 16, port: 1};
    tbl[2] = '{prefix: 32'h0A01_0200, len: 24, port: 2};
    tbl[3] = '{prefix: 32'h0A01_0203, len: 32, port: 2};
    tbl[4] = '{prefix: 32'h0A01_0300, len: 24, port: 1};
    run(5);
    checks++; if (exp_q.size() != 2) failures++;
    for (int t = 0; t < 12; t++) begin
      int n;
      logic [31:0] base [3];
      n = 1 + $urandom % N;
      for (int i = 0; i < 3; i++) base[i] = $urandom;
      for (int i = 0; i < n; i++) begin
        int l;
        l = 4 + $urandom % 29;
        tbl[i].prefix = (base[$urandom % 3] ^ (32'($urandom % 4) << (32 - l))) & pmask(l);
        tbl[i].len = 6'(l);
        tbl[i].port = 8'($urandom % 3);
      end
      run(n);
    end
    checks++; if (removed_total == 0) begin failures++; $display("nothing was removed"); end
    $display("routes removed: %0d", removed_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
