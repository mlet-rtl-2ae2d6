// mlet_minimizer -- minimiser unit (MU): routing table in, minimised routing
// table out.
//
// The MU chains the steps that shrink the routing table before it is stored in
// the multistage TCAM: overlap elimination (mlet_overlap_elim) removes routes
// whose parent leads to the same port; the splitter (mlet_splitter) partitions
// what is left into one partial routing table (PRT) per output port; each PRT
// is minimised by an Espresso minimisation unit (EMU); the merger
// (mlet_merger) writes the returned cubes into consecutive table rows and
// records where each PRT lies. The EMUs are not part of this RTL: the PRT
// stream leaves on the emu_req_* port (routes with a last flag per PRT) and
// the minimised cubes come back on emu_rsp_* (cubes with a last flag per
// PRT), PRT by PRT in the order they were sent. An EMU that returns each route
// unchanged as a cube is a valid, unminimised, stand-in.
//
// The chain follows the paper's minimiser figure. The streams, the single
// shared EMU port and the done condition (splitter finished and every PRT sent
// to the EMUs has come back) are this design's own.
//
// Interface: ld_* loads routing-table routes. start (while idle) runs a full
// build over routes 0..num_entries-1; busy stays high until done pulses.
// tbl_* is the row-write bus to the lookup table.
module mlet_minimizer
  import mlet_pkg::*;
#(
  parameter int unsigned ENTRIES = mlet_pkg::MU_ENTRIES,
  parameter int unsigned ROWS    = mlet_pkg::TCAM_ROWS,
  localparam int unsigned IW     = $clog2(ENTRIES + 1),
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // routing-table load
  input  logic              ld_en,
  input  logic [IW-1:0]     ld_addr,
  input  route_t            ld_route,
  // control / status
  input  logic              start,
  input  logic [IW-1:0]     num_entries,
  output logic              busy,
  output logic              done,
  output logic [IW-1:0]     num_kept,
  output logic [RW:0]       rows_used,
  output logic              overflow,
  // EMU request: PRT routes
  output logic              emu_req_valid,
  input  logic              emu_req_ready,
  output route_t            emu_req_route,
  output logic              emu_req_last,
  // EMU response: minimised cubes
  input  logic              emu_rsp_valid,
  output logic              emu_rsp_ready,
  input  cube_t             emu_rsp_cube,
  input  logic              emu_rsp_last,
  // lookup-table writes
  output logic              tbl_clear,
  output logic              tbl_wr_en,
  output logic [RW-1:0]     tbl_wr_row,
  output cube_t             tbl_wr_cube,
  // PRT begin/end records
  input  logic [PORT_W-1:0] prt_query,
  output logic              prt_present,
  output logic [RW-1:0]     prt_begin,
  output logic [RW-1:0]     prt_end
);

  logic   go;
  logic   oe_busy, oe_done, oe_valid, oe_ready;
  route_t oe_route;
  logic   sp_busy, sp_done;
  logic   run_q, split_done_q;
  logic [PORT_W:0] pending_q;           // PRTs sent and not yet returned
  logic [RW:0]     prts_merged;

  assign go = start && !busy;

  mlet_overlap_elim #(.ENTRIES(ENTRIES)) u_oe (
    .clk, .rst_n,
    .ld_en, .ld_addr, .ld_route,
    .start       (go),
    .num_entries,
    .busy        (oe_busy),
    .done        (oe_done),
    .num_kept,
    .out_valid   (oe_valid),
    .out_ready   (oe_ready),
    .out_route   (oe_route)
  );

  mlet_splitter #(.ENTRIES(ENTRIES)) u_split (
    .clk, .rst_n,
    .start     (go),
    .in_valid  (oe_valid),
    .in_ready  (oe_ready),
    .in_route  (oe_route),
    .in_done   (oe_done),
    .out_valid (emu_req_valid),
    .out_ready (emu_req_ready),
    .out_route (emu_req_route),
    .out_last  (emu_req_last),
    .busy      (sp_busy),
    .done      (sp_done)
  );

  mlet_merger #(.ROWS(ROWS)) u_merge (
    .clk, .rst_n,
    .start       (go),
    .in_valid    (emu_rsp_valid),
    .in_ready    (emu_rsp_ready),
    .in_cube     (emu_rsp_cube),
    .in_last     (emu_rsp_last),
    .tbl_clear, .tbl_wr_en, .tbl_wr_row, .tbl_wr_cube,
    .rows_used, .overflow, .prts_merged,
    .prt_query, .prt_present, .prt_begin, .prt_end
  );

  logic sent_prt, got_prt;
  assign sent_prt = emu_req_valid && emu_req_ready && emu_req_last;
  assign got_prt  = emu_rsp_valid && emu_rsp_ready && emu_rsp_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q        <= 1'b0;
      split_done_q <= 1'b0;
      pending_q    <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        run_q        <= 1'b1;
        split_done_q <= 1'b0;
        pending_q    <= '0;
      end else if (run_q) begin
        pending_q <= pending_q + (PORT_W+1)'(sent_prt) - (PORT_W+1)'(got_prt);
        if (sp_done) split_done_q <= 1'b1;
        if (split_done_q && !sp_busy && pending_q == '0 && !sent_prt && !got_prt) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = run_q || oe_busy || sp_busy;

endmodule
