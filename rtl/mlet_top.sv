// mlet_top -- MLET IP lookup engine: minimiser unit plus multistage-TCAM
// lookup path.
//
// Table build: the routing table is loaded through ld_*, then build_start runs
// the minimiser unit (overlap elimination, per-port split, external Espresso
// minimisation units on the emu_* ports, merge). The merger's row writes fill,
// row by row, the three per-row stores of the lookup path: the MSTCAM row
// (value and care bits), the row's prefix length in the LPM selector and the
// output port in the next-hop SRAM.
//
// Lookup: an IPv4 header enters on hdr_*; the separator unit stores the
// destination address, split per stage, in the data registers; the MSTCAM
// searches its NUM_STAGES stages one per cycle, each stage enabled only for
// rows that matched every earlier stage; the LPM selector picks the longest
// matching row and the SRAM returns its output port.
//
// Timing: a lookup takes 1 (separator) + NUM_STAGES (MSTCAM) + 1 (LPM) +
// 1 (SRAM) cycles from header acceptance to res_valid; a new header is
// accepted every NUM_STAGES + 1 cycles at most. Headers are refused
// (hdr_ready low) while a build runs or is being requested, and build_start
// is taken only when no lookup is in flight in the MSTCAM or the separator
// (build_ready).
//
// The block structure follows the paper's two architecture figures; the
// one-stage-per-cycle schedule, the handshakes and the build/lookup
// interlock are this design's own.
module mlet_top #(
  parameter int unsigned ROWS       = mlet_pkg::TCAM_ROWS,
  parameter int unsigned ENTRIES    = mlet_pkg::MU_ENTRIES,
  parameter int unsigned NUM_STAGES = mlet_pkg::NUM_STAGES,
  parameter int unsigned STAGE_W [NUM_STAGES] = '{default: mlet_pkg::STAGE_BITS},
  localparam int unsigned IW = $clog2(ENTRIES + 1),
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // routing-table load and build
  input  logic              ld_en,
  input  logic [IW-1:0]     ld_addr,
  input  mlet_pkg::route_t            ld_route,
  input  logic              build_start,
  input  logic [IW-1:0]     num_entries,
  output logic              build_ready,
  output logic              build_busy,
  output logic              build_done,
  output logic [IW-1:0]     num_kept,
  output logic [RW:0]       rows_used,
  output logic              overflow,
  // Espresso minimisation units (external)
  output logic              emu_req_valid,
  input  logic              emu_req_ready,
  output mlet_pkg::route_t            emu_req_route,
  output logic              emu_req_last,
  input  logic              emu_rsp_valid,
  output logic              emu_rsp_ready,
  input  mlet_pkg::cube_t             emu_rsp_cube,
  input  logic              emu_rsp_last,
  // PRT begin/end records
  input  logic [mlet_pkg::PORT_W-1:0] prt_query,
  output logic              prt_present,
  output logic [RW-1:0]     prt_begin,
  output logic [RW-1:0]     prt_end,
  // packets in
  input  logic              hdr_valid,
  output logic              hdr_ready,
  input  logic [159:0]      hdr,
  // lookup result
  output logic              res_valid,
  output logic              res_hit,
  output logic [mlet_pkg::PORT_W-1:0] res_port,
  output logic [RW-1:0]     res_row
);

  logic          tbl_clear, tbl_wr_en;
  logic [RW-1:0] tbl_wr_row;
  mlet_pkg::cube_t         tbl_wr_cube;

  logic              mst_busy, su_valid, su_ready_raw;
  logic [mlet_pkg::ADDR_W-1:0] su_dr;
  logic              ml_valid;
  logic [ROWS-1:0]   ml;
  logic              sel_valid, sel_hit;
  logic [RW-1:0]     sel_row;
  logic              sram_valid;
  logic [mlet_pkg::PORT_W-1:0] sram_port;
  logic              hit_q;
  logic [RW-1:0]     row_q;

  assign build_ready = !build_busy && !mst_busy && !su_valid;

  mlet_minimizer #(.ENTRIES(ENTRIES), .ROWS(ROWS)) u_mu (
    .clk, .rst_n,
    .ld_en, .ld_addr, .ld_route,
    .start       (build_start && build_ready),
    .num_entries,
    .busy        (build_busy),
    .done        (build_done),
    .num_kept, .rows_used, .overflow,
    .emu_req_valid, .emu_req_ready, .emu_req_route, .emu_req_last,
    .emu_rsp_valid, .emu_rsp_ready, .emu_rsp_cube, .emu_rsp_last,
    .tbl_clear, .tbl_wr_en, .tbl_wr_row, .tbl_wr_cube,
    .prt_query, .prt_present, .prt_begin, .prt_end
  );

  mlet_separator #(.NUM_STAGES(NUM_STAGES), .STAGE_W(STAGE_W)) u_su (
    .clk, .rst_n,
    .hdr_valid   (hdr_valid && !build_busy && !build_start),
    .hdr_ready   (su_ready_raw),
    .hdr,
    .lookup_busy (mst_busy),
    .dr_valid    (su_valid),
    .dr          (su_dr)
  );
  assign hdr_ready = su_ready_raw && !build_busy && !build_start;

  mlet_mstcam #(.ROWS(ROWS), .NUM_STAGES(NUM_STAGES), .STAGE_W(STAGE_W)) u_mstcam (
    .clk, .rst_n,
    .clear    (tbl_clear),
    .wr_en    (tbl_wr_en),
    .wr_row   (tbl_wr_row),
    .wr_value (tbl_wr_cube.value),
    .wr_care  (tbl_wr_cube.care),
    .wr_valid (1'b1),
    .start    (su_valid),
    .key      (su_dr),
    .busy     (mst_busy),
    .ml_valid,
    .ml
  );

  mlet_lpm_selector #(.ROWS(ROWS)) u_lpm (
    .clk, .rst_n,
    .wr_en    (tbl_wr_en),
    .wr_row   (tbl_wr_row),
    .wr_len   (tbl_wr_cube.len),
    .ml_valid,
    .ml,
    .sel_valid,
    .sel_hit,
    .sel_row
  );

  mlet_nexthop_sram #(.ROWS(ROWS), .DATA_W(mlet_pkg::PORT_W)) u_sram (
    .clk, .rst_n,
    .wr_en    (tbl_wr_en),
    .wr_addr  (tbl_wr_row),
    .wr_data  (tbl_wr_cube.port),
    .rd_en    (sel_valid),
    .rd_addr  (sel_row),
    .rd_data  (sram_port),
    .rd_valid (sram_valid)
  );

  // Carry hit and row alongside the SRAM read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q <= 1'b0;
      row_q <= '0;
    end else if (sel_valid) begin
      hit_q <= sel_hit;
      row_q <= sel_row;
    end
  end

  assign res_valid = sram_valid;
  assign res_hit   = hit_q;
  assign res_port  = hit_q ? sram_port : '0;
  assign res_row   = row_q;

endmodule
