// mlet_pkg -- types and constants shared by the MLET IP lookup engine.
//
// The engine looks up 32-bit IPv4 destination addresses in a ternary table
// (the "minimised routing table") that is cut into K column stages. The
// constants below are the defaults of the configuration built here: a 4-stage
// table with equal 8-bit stages and 12372 rows, the row count the evaluated
// routing table shrinks to after minimisation. Widths of next-hop port
// numbers and prefix lengths are this design's own choices.
package mlet_pkg;

  localparam int unsigned ADDR_W      = 32;     // IPv4 destination address
  localparam int unsigned LEN_W       = 6;      // prefix length 0..32
  localparam int unsigned PORT_W      = 8;      // next-hop (output port) id
  localparam int unsigned NUM_PORTS   = 1 << PORT_W;
  localparam int unsigned TCAM_ROWS   = 12372;  // S: minimised table rows
  localparam int unsigned MU_ENTRIES  = 31000;  // routing-table prefixes fed to the minimiser
  localparam int unsigned NUM_STAGES  = 4;      // K
  localparam int unsigned STAGE_BITS  = ADDR_W / NUM_STAGES; // equal stages W/K

  // One routing-table entry: a prefix of length len, and its output port.
  // prefix holds the prefix left-aligned; bits below the length are ignored.
  typedef struct packed {
    logic [ADDR_W-1:0] prefix;
    logic [LEN_W-1:0]  len;
    logic [PORT_W-1:0] port;
  } route_t;

  // One ternary cube (a row of the minimised table). care[b]=1 means bit b
  // must equal value[b]; care[b]=0 is a don't-care cell. len is the LPM
  // priority of the row.
  typedef struct packed {
    logic [ADDR_W-1:0] value;
    logic [ADDR_W-1:0] care;
    logic [LEN_W-1:0]  len;
    logic [PORT_W-1:0] port;
  } cube_t;

  // Care mask of a prefix of length len: the len most significant bits.
  function automatic logic [ADDR_W-1:0] prefix_mask(input logic [LEN_W-1:0] len);
    logic [ADDR_W-1:0] m;
    for (int b = 0; b < ADDR_W; b++) m[ADDR_W-1-b] = (b < int'(len));
    return m;
  endfunction

  // Convert a prefix route into the equivalent cube.
  function automatic cube_t route_to_cube(input route_t r);
    cube_t c;
    c.care  = prefix_mask(r.len);
    c.value = r.prefix & c.care;
    c.len   = r.len;
    c.port  = r.port;
    return c;
  endfunction

endpackage
