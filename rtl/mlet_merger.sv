// mlet_merger -- merges the minimised PRTs into the minimised routing table.
//
// The Espresso minimisation units return, PRT after PRT, the cubes that cover
// each partial routing table. The merger writes them into consecutive rows of
// the lookup table (MSTCAM row, LPM length and next-hop SRAM word in one row
// write) and records, for every PRT, the first and last row it occupies. Those
// begin/end addresses let a later update find the rows of one PRT without
// touching the others. A new build starts with a one-cycle table clear. Cubes
// that do not fit in the ROWS rows are dropped and raise the sticky overflow
// flag.
//
// Placing the PRTs in consecutive rows and keeping their begin/end addresses
// follows the paper; the row-write bus, the order (PRTs in the order they
// arrive, each contiguous) and the overflow handling are this design's own.
//
// Interface: start clears the table and the PRT records. in_valid/in_ready/
// in_cube/in_last take cubes, in_last marking the last cube of a PRT; all cubes
// of a PRT carry the same port. Each accepted cube gives one tbl_wr_* write in
// the same cycle. prt_query returns that PRT's begin/end rows and whether it
// holds any row, combinationally.
module mlet_merger
  import mlet_pkg::*;
#(
  parameter int unsigned ROWS = mlet_pkg::TCAM_ROWS,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  // minimised cubes from the EMUs
  input  logic              in_valid,
  output logic              in_ready,
  input  cube_t             in_cube,
  input  logic              in_last,
  // lookup-table writes
  output logic              tbl_clear,
  output logic              tbl_wr_en,
  output logic [RW-1:0]     tbl_wr_row,
  output cube_t             tbl_wr_cube,
  // status
  output logic [RW:0]       rows_used,
  output logic              overflow,
  output logic [RW:0]       prts_merged,
  // PRT begin/end records
  input  logic [PORT_W-1:0] prt_query,
  output logic              prt_present,
  output logic [RW-1:0]     prt_begin,
  output logic [RW-1:0]     prt_end
);

  logic [RW:0]   ptr_q;
  logic          first_q;               // next cube opens a PRT
  logic [RW-1:0] begin_q   [NUM_PORTS];
  logic [RW-1:0] end_q     [NUM_PORTS];
  logic [NUM_PORTS-1:0] present_q;

  logic fits;
  assign fits      = (32'(ptr_q) < ROWS);
  assign in_ready  = 1'b1;              // a cube is written or dropped at once
  assign tbl_wr_en = in_valid && fits && !start;
  assign tbl_wr_row  = ptr_q[RW-1:0];
  assign tbl_wr_cube = in_cube;
  assign rows_used   = ptr_q;

  always_ff @(posedge clk) begin
    if (tbl_wr_en) begin
      if (first_q) begin_q[in_cube.port] <= ptr_q[RW-1:0];
      end_q[in_cube.port] <= ptr_q[RW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q       <= '0;
      first_q     <= 1'b1;
      present_q   <= '0;
      overflow    <= 1'b0;
      tbl_clear   <= 1'b0;
      prts_merged <= '0;
    end else begin
      tbl_clear <= start;
      if (start) begin
        ptr_q       <= '0;
        first_q     <= 1'b1;
        present_q   <= '0;
        overflow    <= 1'b0;
        prts_merged <= '0;
      end else if (in_valid) begin
        if (fits) begin
          ptr_q <= ptr_q + 1'b1;
          present_q[in_cube.port] <= 1'b1;
        end else begin
          overflow <= 1'b1;
        end
        first_q <= in_last;
        if (in_last) prts_merged <= prts_merged + 1'b1;
      end
    end
  end

  assign prt_present = present_q[prt_query];
  assign prt_begin   = begin_q[prt_query];
  assign prt_end     = end_q[prt_query];

endmodule
