// mlet_lpm_selector -- longest-prefix-match selection over the match lines.
//
// After minimisation the table is stored grouped by partial routing table
// (all rows of one output port together), not sorted by prefix length, so the
// first matching row is not necessarily the longest prefix. Each row therefore
// carries a priority, its prefix length, written here together with the TCAM
// row. Among the rows whose match line is high the selector picks the one with
// the largest length; ties go to the lower row index.
//
// The selection is a balanced binary tree of compare-and-select nodes,
// ceil(log2(ROWS)) levels deep, between the ML register of the MSTCAM and the
// output register. The paper gives only the unit's name and its job (longest
// prefix match selection); the stored-length scheme and the tree are this
// design's own.
//
// Timing: sel_valid/sel_hit/sel_row are registered, one cycle after ml_valid.
// sel_hit is low when no match line is set; sel_row is then 0.
module mlet_lpm_selector #(
  parameter int unsigned ROWS = mlet_pkg::TCAM_ROWS,
  localparam int unsigned LW  = mlet_pkg::LEN_W,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // per-row length write
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [LW-1:0]   wr_len,
  // match lines
  input  logic            ml_valid,
  input  logic [ROWS-1:0] ml,
  // result
  output logic            sel_valid,
  output logic            sel_hit,
  output logic [RW-1:0]   sel_row
);

  localparam int unsigned LEVELS = RW;
  localparam int unsigned P      = 1 << LEVELS;   // leaves, ROWS padded

  typedef struct packed {
    logic          hit;
    logic [LW-1:0] len;
    logic [RW-1:0] row;
  } cand_t;

  logic [LW-1:0] len_q [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_row) < ROWS)) len_q[wr_row] <= wr_len;
  end

  // Reduction tree, level by level: level 0 holds the P leaves (rows past
  // ROWS never hit), level l holds P >> l winners, level LEVELS the result.
  cand_t tree [LEVELS+1][P];
  cand_t best;

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int j = 0; j < P; j++) tree[l][j] = '0;
    for (int j = 0; j < ROWS; j++) begin
      tree[0][j].hit = ml[j];
      tree[0][j].len = ml[j] ? len_q[j] : '0;
      tree[0][j].row = RW'(j);
    end
    for (int l = 1; l <= LEVELS; l++) begin
      for (int j = 0; j < (P >> l); j++) begin
        // the right candidate wins only if it hits and is strictly longer,
        // or the left one misses
        if (tree[l-1][2*j+1].hit &&
            (!tree[l-1][2*j].hit || tree[l-1][2*j+1].len > tree[l-1][2*j].len))
          tree[l][j] = tree[l-1][2*j+1];
        else
          tree[l][j] = tree[l-1][2*j];
      end
    end
    best = tree[LEVELS][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_valid <= 1'b0;
      sel_hit   <= 1'b0;
      sel_row   <= '0;
    end else begin
      sel_valid <= ml_valid;
      if (ml_valid) begin
        sel_hit <= best.hit;
        sel_row <= best.hit ? best.row : '0;
      end
    end
  end

endmodule
