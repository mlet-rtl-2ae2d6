// mlet_emu_model -- behavioural stand-in for the Espresso minimisation units,
// used only by testbenches.
//
// It returns every route of a PRT as one cube (value = prefix, care = the
// prefix's leading bits), i.e. a correct but unminimised cover, PRT by PRT in
// arrival order with the last flag preserved. A one-entry buffer and random
// stalls on both sides exercise the handshakes of the minimiser unit.
module mlet_emu_model
  import mlet_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  route_t req_route,
  input  logic   req_last,
  output logic   rsp_valid,
  input  logic   rsp_ready,
  output cube_t  rsp_cube,
  output logic   rsp_last
);
  logic full_q, stall;
  int   stalls = 0;

  always_ff @(posedge clk) stall <= ($urandom % 4 == 0);

  assign req_ready = !full_q && !stall;
  assign rsp_valid = full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q   <= 1'b0;
      rsp_cube <= '0;
      rsp_last <= 1'b0;
    end else begin
      if (rsp_valid && rsp_ready) full_q <= 1'b0;
      if (req_valid && req_ready) begin
        full_q   <= 1'b1;
        rsp_cube <= route_to_cube(req_route);
        rsp_last <= req_last;
      end
      if (req_valid && !req_ready) stalls <= stalls + 1;
    end
  end
endmodule
