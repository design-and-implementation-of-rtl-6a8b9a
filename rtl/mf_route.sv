// mf_route: routing unit of one router input of the MF-Butterfly.
//
// Given the destination terminal of the head flit waiting at an input, it returns
// two one-hot masks over the router's output ports: the primary choice and an
// alternative that the adaptive allocator may take when the primary output is
// taken or its downstream queue is full. It is purely combinational.
//
// Terminals are numbered 0..N-1 and each stage has R = N/2 routers. The last
// router that serves destination d is L = d >> 1, and it delivers on port d[0].
//  * First stage (router j): the butterfly's first stage; output port d[n-1]
//    (the top destination bit) leads to the half of the network that holds L.
//  * Middle stage (router m): the merged intermediate stages. The routers of
//    one half form a group of G = R/2 routers with local index k, laid out as
//    a chain with side links to k-1 (port 2) and k+1 (port 3). Routers 2p and
//    2p+1 form pair p and both feed last routers 2p' and 2p'+1 of that half,
//    so a message must reach the pair that holds L (pair index L[RB-2:1]).
//    Outside that pair it moves one side link toward it. Inside the pair the
//    primary choice is output d[1] toward last router L; the alternative is the
//    side link to the partner router, unless the message just came from it.
//  * Last stage: output d[0].
// A message never turns back along the chain, so side-link paths hold no cycle
// and wormhole routing cannot deadlock on them.
//
// Taken from the published figures: the first and last stages of the butterfly
// unchanged, the middle stage as merged routers 0..7 for 16 terminals, and the
// side links printed between routers 0-1, 1-2, 2-3, 4-5, 5-6 and 6-7 as
// double-headed arrows. The routing rule itself, the alternative choice inside a
// pair and the extension of the chain to larger N are this design's own.
module mf_route
  import mf_pkg::*;
#(
  parameter int unsigned N      = 32,           // terminals of the network
  parameter stage_e      STAGE  = STAGE_MIDDLE,
  parameter int unsigned J      = 0,            // router index within its stage
  parameter int unsigned NP     = 4,            // router ports
  parameter int unsigned IN_PORT = 0            // which input this unit serves
) (
  input  logic [ADDR_W-1:0] dest,
  output logic [NP-1:0]     primary,
  output logic [NP-1:0]     alternative
);
  localparam int unsigned NB = $clog2(N);       // terminal address bits
  localparam int unsigned RB = NB - 1;          // router index bits
  localparam int unsigned K  = J % (N / 4);     // local index in the group
  localparam int unsigned MY_PAIR = K / 2;

  // Worked out over four ports so the middle-stage rule elaborates for any NP;
  // only the router's own NP ports are passed out.
  logic [3:0]    prim4, alt4;
  logic [RB-1:0] last_r;
  logic [RB-1:0] tgt_pair;

  always_comb begin
    prim4     = '0;
    alt4 = '0;
    last_r      = RB'(dest >> 1);
    tgt_pair    = '0;
    unique case (STAGE)
      STAGE_FIRST: prim4[int'(dest[NB-1])] = 1'b1;
      STAGE_LAST:  prim4[int'(dest[0])]  = 1'b1;
      default: begin
        tgt_pair = RB'(last_r[RB-1:0] >> 1) & RB'((N / 8) - 1);
        if (tgt_pair == RB'(MY_PAIR)) begin
          prim4[int'(dest[1])] = 1'b1;
          // Partner of router k is k+1 when k is even, else k-1.
          if ((K % 2) == 0) begin
            if (IN_PORT != P_DOWN) alt4[P_DOWN] = 1'b1;
          end else begin
            if (IN_PORT != P_UP) alt4[P_UP] = 1'b1;
          end
        end else if (tgt_pair > RB'(MY_PAIR)) begin
          prim4[P_DOWN] = 1'b1;
        end else begin
          prim4[P_UP] = 1'b1;
        end
      end
    endcase
    primary     = prim4[NP-1:0];
    alternative = alt4[NP-1:0];
  end

endmodule
