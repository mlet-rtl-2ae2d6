// mlet_separator -- separator unit (SU) with the stage data registers DR.
//
// The SU takes the header of an incoming IPv4 packet, extracts the 32-bit
// destination address and splits it into NUM_STAGES fields, stage 1 taking the
// STAGE_W[0] most significant bits. Each field is stored in its own data
// register DR_i, the register that drives the key of MSTCAM stage i. The
// extraction and splitting follow the paper; the header format is the
// standard IPv4 one (destination address in header bytes 16..19) and the
// valid/ready handshake is this design's choice.
//
// Interface: hdr is the first 20 bytes of the IPv4 header, byte 0 in
// hdr[159:152]. A header is taken when hdr_valid && hdr_ready; hdr_ready is
// low while the previous address waits in the DRs or the MSTCAM is busy
// (lookup_busy). One cycle after a header is taken, dr_valid pulses and dr
// presents the DR contents (also held afterwards) to the MSTCAM as its search
// start.
module mlet_separator #(
  parameter int unsigned NUM_STAGES = mlet_pkg::NUM_STAGES,
  parameter int unsigned STAGE_W [NUM_STAGES] = '{default: mlet_pkg::STAGE_BITS},
  localparam int unsigned AW    = mlet_pkg::ADDR_W,
  localparam int unsigned HDR_W = 160
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             hdr_valid,
  output logic             hdr_ready,
  input  logic [HDR_W-1:0] hdr,
  input  logic             lookup_busy,
  output logic             dr_valid,
  output logic [AW-1:0]    dr
);

  function automatic int unsigned stage_lsb(input int unsigned s);
    int unsigned acc = 0;
    for (int unsigned i = 0; i <= s; i++) acc += STAGE_W[i];
    return AW - acc;
  endfunction

  // Destination address: header bytes 16..19, the last 32 bits of the header.
  logic [AW-1:0] dst_addr;
  assign dst_addr  = hdr[AW-1:0];
  assign hdr_ready = !dr_valid && !lookup_busy;

  logic take;
  assign take = hdr_valid && hdr_ready;

  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_dr
    localparam int unsigned LSB = stage_lsb(s);
    localparam int unsigned W   = STAGE_W[s];
    logic [W-1:0] dr_q;   // DR_(s+1)
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    dr_q <= '0;
      else if (take) dr_q <= dst_addr[LSB +: W];
    end
    assign dr[LSB +: W] = dr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dr_valid <= 1'b0;
    else        dr_valid <= take;
  end

endmodule
