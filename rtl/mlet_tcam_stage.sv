// mlet_tcam_stage -- one column stage of the multistage TCAM (MSTCAM).
//
// The stage holds ROWS rows of W ternary cells. Each cell stores a value bit
// and a care bit; a cell with care=0 matches either key bit. Row j of the
// stage is compared with the key (the stage's data register DR) only when its
// enable line es[j] is high, and match[j] = es[j] AND (every cared bit of the
// row equals the key). A row whose enable is low reports no match, which is
// how MLET stops a row's later stages from being enabled after the row has
// already failed. Gating the comparison by the enable line follows the paper;
// the value/care cell encoding and the write port are this design's choices.
//
// Interface: one write port (wr_en, wr_row, wr_value, wr_care), written on the
// rising clock edge. The search (key, es -> match) is combinational; the
// surrounding MSTCAM registers the result. Storage is not reset: rows are made
// unusable by the row-valid bits kept in mlet_mstcam, which drive stage 1's
// enables.
module mlet_tcam_stage #(
  parameter int unsigned ROWS = mlet_pkg::TCAM_ROWS,
  parameter int unsigned W    = mlet_pkg::STAGE_BITS,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  // row write
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [W-1:0]    wr_value,
  input  logic [W-1:0]    wr_care,
  // search
  input  logic [W-1:0]    key,
  input  logic [ROWS-1:0] es,
  output logic [ROWS-1:0] match
);

  logic [W-1:0] value_q [ROWS];
  logic [W-1:0] care_q  [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_row) < ROWS)) begin
      value_q[wr_row] <= wr_value & wr_care;
      care_q[wr_row]  <= wr_care;
    end
  end

  always_comb begin
    for (int j = 0; j < ROWS; j++) begin
      match[j] = es[j] && (((key ^ value_q[j]) & care_q[j]) == '0);
    end
  end

endmodule
