// mlet_overlap_elim -- overlap elimination, the first step of the minimiser.
//
// The routing table is loaded into an internal memory of ENTRIES routes. When
// started, the engine checks each route Pb in turn. It scans the whole table
// for Pb's parent: the longest route Pa with |Pa| < |Pb| whose |Pa| leading
// bits equal those of Pb. If a parent exists and has the same output port
// (an "identical parent"), Pb is redundant: every address matching Pb would
// get the same port from Pa. Redundant routes are dropped; every other route
// is sent out on the output stream in table order. Parents are always looked
// up in the complete original table, so the result does not depend on the
// order in which routes are checked. Routes with the same prefix and length as
// another route are neither's parent and are both kept.
//
// The parent definition and the removal rule follow the paper. The sequential
// scan (one candidate parent per clock, about n*n cycles for n routes), the
// memory with a one-cycle synchronous read and the stream handshake are this
// design's own.
//
// Interface: ld_* writes route ld_addr while idle. start with num_entries = n
// runs the scan over routes 0..n-1; busy is high until done pulses. Kept
// routes leave on out_valid/out_ready/out_route; num_kept counts them.
module mlet_overlap_elim
  import mlet_pkg::*;
#(
  parameter int unsigned ENTRIES = mlet_pkg::MU_ENTRIES,
  localparam int unsigned IW     = $clog2(ENTRIES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // table load
  input  logic          ld_en,
  input  logic [IW-1:0] ld_addr,
  input  route_t        ld_route,
  // control
  input  logic          start,
  input  logic [IW-1:0] num_entries,
  output logic          busy,
  output logic          done,
  output logic [IW-1:0] num_kept,
  // surviving routes
  output logic          out_valid,
  input  logic          out_ready,
  output route_t        out_route
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH_B, S_LOAD_B, S_SCAN, S_DECIDE, S_EMIT} state_t;

  route_t mem [ENTRIES];
  route_t rdata;
  logic          rd_en;
  logic [IW-1:0] rd_addr;

  state_t        state_q;
  logic [IW-1:0] n_q, b_q, a_q, a_d;
  route_t        cur_q;            // route Pb under test
  logic          found_q;          // a parent has been seen
  logic [LEN_W-1:0]  best_len_q;   // length of the longest parent so far
  logic [PORT_W-1:0] best_port_q;  // its port

  always_ff @(posedge clk) begin
    if (ld_en && !busy && (32'(ld_addr) < ENTRIES)) mem[ld_addr] <= ld_route;
    if (rd_en) rdata <= mem[rd_addr];
  end

  // Candidate check for the route in rdata (index a_d) against Pb.
  logic is_parent;
  assign is_parent = (a_d != b_q) && (rdata.len < cur_q.len) &&
                     (((rdata.prefix ^ cur_q.prefix) & prefix_mask(rdata.len)) == '0);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    case (state_q)
      S_FETCH_B: begin rd_en = 1'b1; rd_addr = b_q; end
      S_LOAD_B:  begin rd_en = 1'b1; rd_addr = '0;  end
      S_SCAN:    begin rd_en = (a_q < n_q); rd_addr = a_q; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      n_q         <= '0;
      b_q         <= '0;
      a_q         <= '0;
      a_d         <= '0;
      cur_q       <= '0;
      found_q     <= 1'b0;
      best_len_q  <= '0;
      best_port_q <= '0;
      done        <= 1'b0;
      num_kept    <= '0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          n_q      <= (32'(num_entries) > ENTRIES) ? IW'(ENTRIES) : num_entries;
          b_q      <= '0;
          num_kept <= '0;
          if (num_entries == '0) done <= 1'b1;
          else                   state_q <= S_FETCH_B;
        end
        S_FETCH_B: state_q <= S_LOAD_B;
        S_LOAD_B: begin
          cur_q   <= rdata;
          found_q <= 1'b0;
          best_len_q  <= '0;
          best_port_q <= '0;
          a_q     <= IW'(1);
          a_d     <= '0;
          state_q <= S_SCAN;
        end
        S_SCAN: begin
          if (is_parent && (!found_q || rdata.len > best_len_q)) begin
            found_q     <= 1'b1;
            best_len_q  <= rdata.len;
            best_port_q <= rdata.port;
          end
          a_d <= a_q;
          if (a_q < n_q) a_q <= a_q + 1'b1;
          else           state_q <= S_DECIDE;
        end
        S_DECIDE: begin
          if (found_q && (best_port_q == cur_q.port)) begin
            // redundant: identical parent exists
            if (b_q + 1'b1 < n_q) begin b_q <= b_q + 1'b1; state_q <= S_FETCH_B; end
            else begin done <= 1'b1; state_q <= S_IDLE; end
          end else begin
            state_q <= S_EMIT;
          end
        end
        S_EMIT: if (out_ready) begin
          num_kept <= num_kept + 1'b1;
          if (b_q + 1'b1 < n_q) begin b_q <= b_q + 1'b1; state_q <= S_FETCH_B; end
          else begin done <= 1'b1; state_q <= S_IDLE; end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state_q != S_IDLE);
  assign out_valid = (state_q == S_EMIT);
  assign out_route = cur_q;

endmodule
