// tb_mlet_splitter -- self-checking test of the PRT splitter.
// Random route lists (ports 0..5 and 200, so most ports are empty) are fed
// with random input gaps and random output stalls. The output must be the
// routes of port 0 in input order, then those of port 1, and so on, with
// out_last on the final route of each port, and done at the end.
module tb_mlet_splitter;
  import mlet_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, in_done, out_valid, out_ready, out_last, busy, done;
  route_t in_route, out_route;
  route_t exp_q [$];
  logic   exp_last [$];
  int checks = 0, failures = 0;

  mlet_splitter #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n);
    route_t lst [$];
    int got, cyc;
    lst.delete(); exp_q.delete(); exp_last.delete();
    for (int i = 0; i < n; i++) begin
      route_t r;
      r.prefix = $urandom; r.len = 6'($urandom % 33);
      r.port = ($urandom % 8 == 0) ? 8'd200 : 8'($urandom % 6);
      lst.push_back(r);
    end
    for (int q = 0; q < 256; q++) begin
      int last_i = -1;
      for (int i = 0; i < n; i++) if (lst[i].port == q) last_i = i;
      for (int i = 0; i < n; i++) if (lst[i].port == q) begin
        exp_q.push_back(lst[i]); exp_last.push_back(i == last_i);
      end
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      while ($urandom % 3 == 0) @(negedge clk);
      in_valid = 1; in_route = lst[i];
      #1; checks++; if (!in_ready) failures++;
      @(negedge clk); in_valid = 0;
    end
    in_done = 1; @(negedge clk); in_done = 0;
    got = 0; cyc = 0;
    while (!done && cyc < 20000) begin
      out_ready = ($urandom % 3 != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (got >= exp_q.size() || out_route !== exp_q[got] || out_last !== exp_last[got]) begin
          failures++;
          $display("out %0d: port %0d last %b unexpected", got, out_route.port, out_last);
        end
        got++;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (!done || got != exp_q.size()) begin
      failures++; $display("n=%0d got %0d of %0d, done=%b", n, got, exp_q.size(), done);
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_done = 0; out_ready = 1; in_route = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1);
    for (int t = 0; t < 8; t++) run(1 + $urandom % N);
    run(N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
