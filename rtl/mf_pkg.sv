// mf_pkg: types and routing rules shared by the Meta-Flattened Butterfly
// (MF-Butterfly) network.
//
// A message is a worm of flits. Every flit carries a head and a tail marker and a
// 32-bit data word; a two-flit message (the size used for the synthetic traffic)
// is a head flit followed by a tail flit. The head flit's data word carries the
// destination terminal in bits [7:0] and the source terminal in bits [15:8]; the
// remaining bits and the whole tail flit are payload. The 32-bit width and the
// field placement are this design's own choices: only the message length of two
// flits comes from the published description.
//
// The package also holds the routing rule of each of the three router stages
// (first, merged middle, last), so the routing unit and the testbenches of the
// network can share the port numbering below.
package mf_pkg;

  localparam int unsigned FLIT_DW   = 32;  // data bits per flit (own choice)
  localparam int unsigned ADDR_W    = 8;   // width of the destination/source fields
  localparam int unsigned MSG_FLITS = 2;   // flits per synthetic message

  typedef struct packed {
    logic               head;  // first flit of a message: carries the address
    logic               tail;  // last flit of a message: releases the path
    logic [FLIT_DW-1:0] data;
  } flit_t;

  // Router stages of the three-stage MF-Butterfly.
  typedef enum logic [1:0] {
    STAGE_FIRST  = 2'd0,  // 2x2, unchanged first butterfly stage
    STAGE_MIDDLE = 2'd1,  // 4x4, merged intermediate stages with side links
    STAGE_LAST   = 2'd2   // 2x2, unchanged last butterfly stage
  } stage_e;

  // Port numbering of a middle router. Ports 0 and 1 face the neighbouring
  // stages; port 2 links to the router above it (local index k-1) and port 3 to
  // the router below it (k+1) within the same group.
  localparam int unsigned P_UP   = 2;
  localparam int unsigned P_DOWN = 3;

  function automatic logic [ADDR_W-1:0] flit_dest(input flit_t f);
    return f.data[ADDR_W-1:0];
  endfunction

  function automatic logic [ADDR_W-1:0] flit_src(input flit_t f);
    return f.data[2*ADDR_W-1:ADDR_W];
  endfunction

  function automatic flit_t make_head(input logic [ADDR_W-1:0] dest,
                                      input logic [ADDR_W-1:0] src,
                                      input logic [FLIT_DW-2*ADDR_W-1:0] tag,
                                      input logic single);
    flit_t f;
    f.head = 1'b1;
    f.tail = single;
    f.data = {tag, src, dest};
    return f;
  endfunction

endpackage
