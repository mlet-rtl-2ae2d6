// mlet_splitter -- splits the overlap-eliminated table into partial routing
// tables (PRTs), one per output port.
//
// Partition rule: route (p, q) belongs to PRT q, so every PRT holds only routes
// to one port and can be minimised on its own. The splitter first collects the
// incoming routes into a buffer while counting how many go to each port. When
// the input ends it emits the PRTs one after the other, in increasing port
// order, each as a run of routes tagged with its PRT number and with a last
// flag on its final route; ports without routes are skipped in one cycle each.
// Emitting a PRT scans the buffer once, so the emit phase takes about
// (number of non-empty PRTs) x (routes) cycles.
//
// The partition rule follows the paper. The buffer, the count-then-scan
// method, the PRT order and the stream format are this design's own; the
// buffer uses an asynchronous read.
//
// Interface: in_valid/in_ready/in_route, then in_done (one-cycle pulse) ends
// the table. out_valid/out_ready/out_route/out_last deliver the PRTs; done
// pulses after the last PRT; busy covers collection and emission.
module mlet_splitter
  import mlet_pkg::*;
#(
  parameter int unsigned ENTRIES = mlet_pkg::MU_ENTRIES,
  localparam int unsigned IW     = $clog2(ENTRIES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // begin collecting a new table
  // input routes
  input  logic          in_valid,
  output logic          in_ready,
  input  route_t        in_route,
  input  logic          in_done,
  // PRT stream
  output logic          out_valid,
  input  logic          out_ready,
  output route_t        out_route,
  output logic          out_last,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_NEXT_PRT, S_EMIT} state_t;

  route_t        buf_q [ENTRIES];
  logic [IW-1:0] cnt_q [NUM_PORTS];   // routes per port
  state_t        state_q;
  logic [IW-1:0] wp_q;                // routes collected
  logic [IW-1:0] rp_q;                // scan pointer
  logic [IW-1:0] sent_q;              // routes of the current PRT sent
  logic [PORT_W:0] prt_q;             // current PRT (port), one extra bit

  route_t cur;
  assign cur = buf_q[rp_q < IW'(ENTRIES) ? rp_q : '0];

  logic sel;                          // buffer entry belongs to current PRT
  assign sel = (state_q == S_EMIT) && (cur.port == prt_q[PORT_W-1:0]);

  assign in_ready  = (state_q == S_COLLECT) && (32'(wp_q) < ENTRIES);
  assign out_valid = sel;
  assign out_route = cur;
  assign out_last  = sel && (sent_q + 1'b1 == cnt_q[prt_q[PORT_W-1:0]]);
  assign busy      = (state_q != S_IDLE);

  // Buffer and per-port counters; the counters are cleared by start, so they
  // need no reset.
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buf_q[wp_q] <= in_route;
    if (state_q == S_IDLE && start) begin
      for (int q = 0; q < NUM_PORTS; q++) cnt_q[q] <= '0;
    end else if (in_valid && in_ready) begin
      cnt_q[in_route.port] <= cnt_q[in_route.port] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      wp_q    <= '0;
      rp_q    <= '0;
      sent_q  <= '0;
      prt_q   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          wp_q    <= '0;
          state_q <= S_COLLECT;
        end
        S_COLLECT: begin
          if (in_valid && in_ready) wp_q <= wp_q + 1'b1;
          if (in_done) begin
            prt_q   <= '0;
            state_q <= S_NEXT_PRT;
          end
        end
        S_NEXT_PRT: begin
          if (prt_q == (PORT_W+1)'(NUM_PORTS)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else if (cnt_q[prt_q[PORT_W-1:0]] == '0) begin
            prt_q <= prt_q + 1'b1;            // empty PRT
          end else begin
            rp_q    <= '0;
            sent_q  <= '0;
            state_q <= S_EMIT;
          end
        end
        S_EMIT: begin
          if (!sel || out_ready) begin
            if (sel) sent_q <= sent_q + 1'b1;
            if (out_last || (rp_q + 1'b1 >= wp_q)) begin
              prt_q   <= prt_q + 1'b1;
              state_q <= S_NEXT_PRT;
            end else begin
              rp_q <= rp_q + 1'b1;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The input must not end in the middle of a handshake of a full buffer.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_COLLECT && in_valid) |-> (32'(wp_q) < ENTRIES))
    else $error("mlet_splitter: more routes than the buffer holds");

endmodule
