// mlet_nexthop_sram -- next-hop memory addressed by the winning TCAM row.
//
// Row j of the minimised table has its output port stored at address j of
// this single-port-write, single-port-read synchronous RAM. The lookup path
// reads it with the row index from the LPM selector; the table builder writes
// it together with the TCAM row. Its place in the datapath (after the LPM
// selector, producing the output port) follows the paper's architecture
// figure; its organisation (one word per row, one read and one write port,
// one-cycle read latency) is this design's choice.
//
// Timing: rd_data and rd_valid appear the cycle after rd_en. A read and a
// write to the same address in one cycle return the old word.
module mlet_nexthop_sram #(
  parameter int unsigned ROWS   = mlet_pkg::TCAM_ROWS,
  parameter int unsigned DATA_W = mlet_pkg::PORT_W,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [RW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [RW-1:0]     rd_addr,
  output logic [DATA_W-1:0] rd_data,
  output logic              rd_valid
);

  logic [DATA_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < ROWS)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < ROWS) ? mem[rd_addr] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
