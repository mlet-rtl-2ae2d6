// mlet_mstcam -- multistage TCAM, the core of the Multilevel Enabling
// Technique (MLET).
//
// A ROWS x 32 ternary table is cut into NUM_STAGES column stages; stage i is
// STAGE_W[i] bits wide, stage 0 holding the most significant address bits,
// and the widths add up to 32. A search walks the stages one per clock cycle:
//   cycle 1: stage 1 is enabled for every valid row (ES(1,j) = row valid);
//   cycle i: stage i is enabled only for rows whose stage i-1 matched,
//            ES(i,j) = Match(i-1,j), taken from the es_q register;
//   cycle K: the matches of the last stage become the match lines ML.
// Stages that are not being searched get all enables low, so a row that
// mismatches early never enables its remaining cells. This reduces the number
// of enabled cells per search, the power metric the method optimises, while
// giving the same match lines as a one-stage TCAM.
//
// The stage-by-stage enabling rules follow the paper. Running one stage per
// clock cycle (latency NUM_STAGES, one search in flight, `busy` while
// searching), the row-valid bits and the clear input are this design's
// choices.
//
// Interface: start/key begin a search when !busy (key is the DR contents,
// stage fields concatenated, stage 1 in the MSBs); ml_valid pulses for one
// cycle, NUM_STAGES cycles after start, with ml holding the match lines until
// the next search ends. Row writes (wr_*) and clear take effect on the next
// clock edge; they should not be issued while busy.
module mlet_mstcam #(
  parameter int unsigned ROWS       = mlet_pkg::TCAM_ROWS,
  parameter int unsigned NUM_STAGES = mlet_pkg::NUM_STAGES,
  parameter int unsigned STAGE_W [NUM_STAGES] = '{default: mlet_pkg::STAGE_BITS},
  localparam int unsigned AW = mlet_pkg::ADDR_W,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // table maintenance
  input  logic            clear,      // invalidate every row
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [AW-1:0]   wr_value,
  input  logic [AW-1:0]   wr_care,
  input  logic            wr_valid,   // 1: row holds an entry, 0: delete row
  // search
  input  logic            start,
  input  logic [AW-1:0]   key,
  output logic            busy,
  output logic            ml_valid,
  output logic [ROWS-1:0] ml
);

  // Least significant bit of stage s (stage 0 holds the MSBs).
  function automatic int unsigned stage_lsb(input int unsigned s);
    int unsigned acc = 0;
    for (int unsigned i = 0; i <= s; i++) acc += STAGE_W[i];
    return AW - acc;
  endfunction

  function automatic int unsigned total_width();
    int unsigned acc = 0;
    for (int unsigned i = 0; i < NUM_STAGES; i++) acc += STAGE_W[i];
    return acc;
  endfunction

  localparam int unsigned SW = (NUM_STAGES > 1) ? $clog2(NUM_STAGES) : 1;

  logic [ROWS-1:0] row_valid_q;
  logic [ROWS-1:0] es_q;                  // enables of the stage searched next
  logic [AW-1:0]   key_q;
  logic [SW-1:0]   stage_q;               // stage being searched
  logic            busy_q;

  logic [ROWS-1:0] es_stage    [NUM_STAGES];
  logic [ROWS-1:0] match_stage [NUM_STAGES];
  logic [ROWS-1:0] match_cur;

  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_stage
    localparam int unsigned LSB = stage_lsb(s);
    localparam int unsigned W   = STAGE_W[s];

    // ES(s,j): the first stage takes the row-valid bits, later stages the
    // registered matches of the stage before. Idle stages are disabled.
    assign es_stage[s] = (busy_q && (32'(stage_q) == s)) ?
                         ((s == 0) ? row_valid_q : es_q) : '0;

    mlet_tcam_stage #(.ROWS(ROWS), .W(W)) u_stage (
      .clk      (clk),
      .wr_en    (wr_en),
      .wr_row   (wr_row),
      .wr_value (wr_value[LSB +: W]),
      .wr_care  (wr_care[LSB +: W]),
      .key      (key_q[LSB +: W]),
      .es       (es_stage[s]),
      .match    (match_stage[s])
    );
  end

  always_comb begin
    match_cur = '0;
    for (int s = 0; s < NUM_STAGES; s++) match_cur |= match_stage[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid_q <= '0;
      es_q        <= '0;
      key_q       <= '0;
      stage_q     <= '0;
      busy_q      <= 1'b0;
      ml_valid    <= 1'b0;
      ml          <= '0;
    end else begin
      ml_valid <= 1'b0;
      if (clear) row_valid_q <= '0;
      else if (wr_en && (32'(wr_row) < ROWS)) row_valid_q[wr_row] <= wr_valid;

      if (!busy_q) begin
        if (start) begin
          busy_q  <= 1'b1;
          stage_q <= '0;
          key_q   <= key;
        end
      end else if (32'(stage_q) == NUM_STAGES - 1) begin
        ml       <= match_cur;              // ML(j) = Match(K,j)
        ml_valid <= 1'b1;
        busy_q   <= 1'b0;
        es_q     <= '0;
      end else begin
        es_q    <= match_cur;               // ES(i+1,j) = Match(i,j)
        stage_q <= stage_q + 1'b1;
      end
    end
  end

  assign busy = busy_q;

  initial begin
    assert (total_width() == AW)
      else $error("mlet_mstcam: stage widths add up to %0d, not %0d", total_width(), AW);
  end

  // A write during a search would change the rows under comparison.
  assert property (@(posedge clk) disable iff (!rst_n) busy_q |-> !(wr_en || clear))
    else $error("mlet_mstcam: table written while a search is in progress");

endmodule
