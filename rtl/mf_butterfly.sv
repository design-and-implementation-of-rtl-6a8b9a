// mf_butterfly: the Meta-Flattened Butterfly (MF-Butterfly) multistage network,
// N terminals in, N terminals out, built from three stages of wormhole routers.
//
// A conventional butterfly of N terminals has log2(N) stages of N/2 2x2
// routers and exactly one path between a source and a destination. The
// MF-Butterfly keeps the first and the last stage as they are and merges all
// intermediate stages into one stage of N/2 larger routers that are linked to
// their neighbours, so a message crosses three routers plus any side links and
// has more than one way to reach the last stage.
//
// Wiring, with R = N/2 routers per stage and G = N/4 routers per half:
//  * inj[2j+b] enters first-stage router j on port b; ej[2L+b] leaves
//    last-stage router L on port b.
//  * First router j, output h, goes to middle router (j mod G) + h*G, input
//    port j div G (the long crossings of the butterfly's first stage).
//  * Middle router m, output b, goes to last router (m with bit 0 cleared) + b,
//    input port m mod 2 (the short crossings of the butterfly's last stage).
//  * Within each half the middle routers form a chain: port 3 of router m
//    links to port 2 of router m+1 in both directions. The end routers of a
//    chain leave one side port unconnected (input idle, output never ready),
//    so every middle router is the same 4x4 router.
// The first and last stages, the middle routers 0..7 and the side links between
// routers 0-1, 1-2, 2-3, 4-5, 5-6 and 6-7 follow the published 16-terminal
// drawing; the extension to other N (a longer chain per half) is this design's
// own. The default of 32 terminals is the network size used in the published
// evaluation.
//
// Interface: inj_* are the injection links from the processors, ej_* the
// delivery links to the destinations, both valid/ready (see mf_router). A flit
// spends two cycles in each router it passes when no other message is in the
// way, so a two-flit message crossing three routers with no side link arrives
// complete 7 cycles after its head flit was accepted (head in cycle 6, tail in
// cycle 7).
//
// The per-router statistics (m_alt, m_blk and their first/last-stage
// counterparts) are collected here but drive no output; lint reports them as
// unused. They exist so that a testbench can count adaptive grants and waiting
// head flits without widening the network's interface.
module mf_butterfly
  import mf_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] inj_valid,
  input  flit_t        inj_flit [N],
  output logic [N-1:0] inj_ready,
  output logic [N-1:0] ej_valid,
  output flit_t        ej_flit  [N],
  input  logic [N-1:0] ej_ready
);
  localparam int unsigned R = N / 2;
  localparam int unsigned G = N / 4;

  // First stage links (router j, port b).
  logic [1:0] f_iv [R], f_ir [R], f_ov [R], f_or [R];
  flit_t      f_if [R][2], f_of [R][2];
  // Middle stage links.
  logic [3:0] m_iv [R], m_ir [R], m_ov [R], m_or [R];
  flit_t      m_if [R][4], m_of [R][4];
  // Last stage links.
  logic [1:0] l_iv [R], l_ir [R], l_ov [R], l_or [R];
  flit_t      l_if [R][2], l_of [R][2];
  // Statistics of the middle routers, unused by the network itself.
  logic [3:0] m_alt [R], m_blk [R];
  logic [1:0] f_alt [R], f_blk [R], l_alt [R], l_blk [R];

  for (genvar j = 0; j < R; j++) begin : g_wire
    for (genvar b = 0; b < 2; b++) begin : g_port
      // Terminals.
      assign f_iv[j][b]      = inj_valid[2*j+b];
      assign f_if[j][b]      = inj_flit[2*j+b];
      assign inj_ready[2*j+b] = f_ir[j][b];
      assign ej_valid[2*j+b] = l_ov[j][b];
      assign ej_flit[2*j+b]  = l_of[j][b];
      assign l_or[j][b]      = ej_ready[2*j+b];
      // First stage output b of router j -> middle (j mod G) + b*G, port j div G.
      assign m_iv[(j%G)+b*G][j/G] = f_ov[j][b];
      assign m_if[(j%G)+b*G][j/G] = f_of[j][b];
      assign f_or[j][b]           = m_ir[(j%G)+b*G][j/G];
      // Middle output b of router j -> last (j & ~1) + b, port j mod 2.
      assign l_iv[(j/2)*2+b][j%2] = m_ov[j][b];
      assign l_if[(j/2)*2+b][j%2] = m_of[j][b];
      assign m_or[j][b]           = l_ir[(j/2)*2+b][j%2];
    end
    // Side links of the middle chain.
    if ((j % G) != G - 1) begin : g_down
      assign m_iv[j+1][P_UP] = m_ov[j][P_DOWN];
      assign m_if[j+1][P_UP] = m_of[j][P_DOWN];
      assign m_or[j][P_DOWN] = m_ir[j+1][P_UP];
      assign m_iv[j][P_DOWN] = m_ov[j+1][P_UP];
      assign m_if[j][P_DOWN] = m_of[j+1][P_UP];
      assign m_or[j+1][P_UP] = m_ir[j][P_DOWN];
    end else begin : g_end_down
      assign m_iv[j][P_DOWN] = 1'b0;
      assign m_if[j][P_DOWN] = '0;
      assign m_or[j][P_DOWN] = 1'b0;
    end
    if ((j % G) == 0) begin : g_end_up
      assign m_iv[j][P_UP] = 1'b0;
      assign m_if[j][P_UP] = '0;
      assign m_or[j][P_UP] = 1'b0;
    end
  end

  for (genvar j = 0; j < R; j++) begin : g_rt
    mf_router #(.N(N), .STAGE(STAGE_FIRST), .J(j), .NP(2), .DEPTH(DEPTH)) u_first (
      .clk, .rst_n,
      .in_valid(f_iv[j]), .in_flit(f_if[j]), .in_ready(f_ir[j]),
      .out_valid(f_ov[j]), .out_flit(f_of[j]), .out_ready(f_or[j]),
      .stat_alt(f_alt[j]), .stat_block(f_blk[j])
    );
    mf_router #(.N(N), .STAGE(STAGE_MIDDLE), .J(j), .NP(4), .DEPTH(DEPTH)) u_mid (
      .clk, .rst_n,
      .in_valid(m_iv[j]), .in_flit(m_if[j]), .in_ready(m_ir[j]),
      .out_valid(m_ov[j]), .out_flit(m_of[j]), .out_ready(m_or[j]),
      .stat_alt(m_alt[j]), .stat_block(m_blk[j])
    );
    mf_router #(.N(N), .STAGE(STAGE_LAST), .J(j), .NP(2), .DEPTH(DEPTH)) u_last (
      .clk, .rst_n,
      .in_valid(l_iv[j]), .in_flit(l_if[j]), .in_ready(l_ir[j]),
      .out_valid(l_ov[j]), .out_flit(l_of[j]), .out_ready(l_or[j]),
      .stat_alt(l_alt[j]), .stat_block(l_blk[j])
    );
  end

endmodule
