// tb_mlet_top_full -- the end-to-end test of tb_mlet_top run on the engine
// at its default size (12372 table rows, 31000-route minimiser memory,
// 4 stages of 8 bits), with fewer lookups. Only 60 routes are loaded, so the
// build is short; the searches still cover every row of the table.
//
// Description of the shared test:
// A random routing table (nested prefixes around a few base addresses,
// ports 0..3, every prefix/length pair unique) is loaded and built through the
// minimiser unit, with the behavioural EMU returning an unminimised cover.
// Then IPv4 headers are looked up and every result is compared with a
// reference longest-prefix match over the ORIGINAL table: overlap elimination,
// partitioning, merging, multistage search and LPM selection together must
// forward every address exactly as the full table would. The latency from
// header acceptance to result (NUM_STAGES + 3 cycles) is checked. The table
// is then rebuilt with a second table and the lookups repeated.
//
// Mechanisms counted (each must occur): routes removed by overlap
// elimination, rows disabled held0 the last stage, lookups with several
// matching rows (LPM choice), misses, headers held off while the MSTCAM is
// busy, headers refused during a build, EMU back-pressure, table rebuilds.
// The mean enabled cells per search and the resulting POF are printed.
module tb_mlet_top_full;
  import mlet_pkg::*;
  localparam int N = 60, ROWS = mlet_pkg::TCAM_ROWS, K = mlet_pkg::NUM_STAGES;
  localparam int IW = $clog2(mlet_pkg::MU_ENTRIES + 1), RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic ld_en, build_start, build_ready, build_busy, build_done, overflow;
  logic [IW-1:0] ld_addr, num_entries, num_kept;
  logic [RW:0] rows_used;
  route_t ld_route;
  logic emu_req_valid, emu_req_ready, emu_req_last, emu_rsp_valid, emu_rsp_ready, emu_rsp_last;
  route_t emu_req_route;
  cube_t emu_rsp_cube;
  logic [7:0] prt_query;
  logic prt_present;
  logic [RW-1:0] prt_begin, prt_end, res_row;
  logic hdr_valid, hdr_ready, res_valid, res_hit;
  logic [159:0] hdr;
  logic [7:0] res_port;

  mlet_top dut (.*);
  mlet_emu_model emu (.clk, .rst_n,
    .req_valid(emu_req_valid), .req_ready(emu_req_ready), .req_route(emu_req_route), .req_last(emu_req_last),
    .rsp_valid(emu_rsp_valid), .rsp_ready(emu_rsp_ready), .rsp_cube(emu_rsp_cube), .rsp_last(emu_rsp_last));
  always #5 clk = ~clk;

  route_t tbl [N];
  int n_routes;
  int checks = 0, failures = 0;
  int removed = 0, early_off = 0, multi = 0, misses = 0, held = 0, refused = 0, builds = 0;
  longint eps = 0, searches = 0;

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pmask(input int len);
    return (len == 0) ? 32'h0 : ~32'h0 << (32 - len);
  endfunction

  // Enabled cells per cycle, and rows dropped between stages.
  always @(posedge clk) begin
    for (int s = 0; s < K; s++) eps += $countones(dut.u_mstcam.es_stage[s]) * 8;
    if (dut.u_mstcam.busy && dut.u_mstcam.stage_q != 2'(K - 1))
      early_off += $countones(dut.u_mstcam.es_stage[dut.u_mstcam.stage_q] & ~dut.u_mstcam.match_cur);
  end

  task automatic make_table(input int n, input int seed_ports);
    logic [31:0] base [3];
    for (int i = 0; i < 3; i++) base[i] = $urandom;
    n_routes = n;
    for (int i = 0; i < n; i++) begin
      bit dup;
      do begin
        int l;
        l = 1 + $urandom % 32;
        tbl[i].prefix = (base[$urandom % 3] ^ (32'($urandom % 16) << (32 - l))) & pmask(l);
        tbl[i].len = 6'(l);
        tbl[i].port = 8'(($urandom % 4) + seed_ports);
        dup = 0;
        for (int j = 0; j < i; j++)
          if (tbl[j].prefix == tbl[i].prefix && tbl[j].len == tbl[i].len) dup = 1;
      end while (dup);
    end
  endtask

  task automatic build();
    int cyc = 0;
    for (int i = 0; i < n_routes; i++) begin
      @(negedge clk); ld_en = 1; ld_addr = IW'(i); ld_route = tbl[i];
    end
    @(negedge clk); ld_en = 0;
    while (!build_ready) @(negedge clk);
    build_start = 1; num_entries = IW'(n_routes);
    @(negedge clk); build_start = 0;
    // a header offered during the build must be refused
    hdr_valid = 1; hdr = {128'h0, 32'h0A000001};
    while (!build_done && cyc < 200000) begin
      #1;
      if (build_busy) begin
        checks++; if (hdr_ready) begin failures++; $display("header accepted during build"); end
        refused++;
      end
      @(negedge clk); cyc++;
    end
    hdr_valid = 0;
    checks++;
    if (!build_done || overflow) begin failures++; $display("build failed: done=%b overflow=%b", build_done, overflow); end
    removed += n_routes - int'(num_kept);
    checks++;
    if (int'(rows_used) != int'(num_kept)) begin failures++; $display("rows %0d kept %0d", rows_used, num_kept); end
    builds++;
  endtask

  task automatic lookup(input logic [31:0] a);
    int best = -1, bport = 0, nm = 0, cyc = 0;
    for (int i = 0; i < n_routes; i++)
      if (((a ^ tbl[i].prefix) & pmask(int'(tbl[i].len))) == 0) begin
        if (int'(tbl[i].len) > best) begin best = int'(tbl[i].len); bport = int'(tbl[i].port); end
      end
    @(negedge clk);
    hdr_valid = 1; hdr = {32'h4500_0054, 32'h0, 32'h4006_0000, 32'hC0A8_0001, a};
    #1;
    while (!hdr_ready) begin held++; @(negedge clk); #1; end
    @(negedge clk); hdr_valid = 0;
    // accepted at the edge just passed (edge 0); the result is registered at
    // edge K+3, seen at the following falling edge, when cyc = K+4
    cyc = 1;
    while (!res_valid && cyc < 50) begin @(negedge clk); cyc++; end
    for (int j = 0; j < ROWS; j++) nm += dut.u_mstcam.ml[j];
    if (nm > 1) multi++;
    if (best < 0) misses++;
    searches++;
    checks++;
    if (!res_valid || cyc != K + 4 || res_hit !== (best >= 0) || (best >= 0 && int'(res_port) != bport)) begin
      failures++;
      $display("lookup %h: valid=%b hit=%b port=%0d cycles=%0d, expected hit=%b port=%0d", a, res_valid,
               res_hit, res_port, cyc, best >= 0, bport);
    end
  endtask

  task automatic lookups(input int m);
    for (int t = 0; t < m; t++) begin
      logic [31:0] a;
      int r;
      r = $urandom % n_routes;
      a = (t % 4 == 3) ? $urandom : (tbl[r].prefix | ($urandom & ~pmask(int'(tbl[r].len))));
      lookup(a);
    end
  endtask

  // Back-to-back headers: the second one must wait for the MSTCAM.
  task automatic back_to_back();
    int held0;
    held0 = held;
    @(negedge clk);
    hdr_valid = 1; hdr = {128'h0, tbl[0].prefix};
    @(negedge clk);
    hdr = {128'h0, tbl[1].prefix};
    #1;
    while (!hdr_ready) begin held++; @(negedge clk); #1; end
    @(negedge clk); hdr_valid = 0;
    repeat (2 * K + 8) @(negedge clk);
    checks++; if (held == held0) begin failures++; $display("second header was not held off"); end
  endtask

  initial begin
    ld_en = 0; build_start = 0; ld_addr = 0; num_entries = 0; ld_route = '0; prt_query = 0;
    hdr_valid = 0; hdr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_table(N, 0);
    build();
    lookups(60);
    back_to_back();
    make_table(N / 2, 2);
    build();
    lookups(40);
    $display("builds=%0d removed=%0d early_off=%0d multi=%0d misses=%0d held=%0d refused=%0d emu_stalls=%0d",
             builds, removed, early_off, multi, misses, held, refused, emu.stalls);
    $display("mean enabled cells per search %0d of %0d, POF=%0d%%", eps / searches, ROWS * 32,
             100 - (100 * eps) / (searches * ROWS * 32));
    if (removed == 0)    begin failures++; $display("no route removed"); end
    if (early_off == 0)  begin failures++; $display("no row disabled early"); end
    if (multi == 0)      begin failures++; $display("no multiple match"); end
    if (misses == 0)     begin failures++; $display("no miss"); end
    if (held == 0)       begin failures++; $display("no header held off"); end
    if (refused == 0)    begin failures++; $display("no header refused in build"); end
    if (emu.stalls == 0) begin failures++; $display("no EMU stall"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
