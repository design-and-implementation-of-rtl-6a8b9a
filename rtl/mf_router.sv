// mf_router: wormhole router of the MF-Butterfly, NP inputs by NP outputs.
//
// Each input has a flit_fifo queue and a routing unit (mf_route). A message is
// switched as a worm: its head flit reserves an output, the following flits
// use the same output, and the tail flit releases it. No other message's flits
// can enter an output while a worm holds it.
//
// Allocation (one cycle): inputs are visited in round-robin order, starting
// after the input granted most recently. An input whose queue shows a head flit
// and that holds no output takes its primary output if that output is free, not
// already granted this cycle and its downstream queue has room; failing that it
// takes the alternative output on the same terms (adaptive routing); otherwise
// it waits. Transfer: an output passes one flit per cycle from the input that
// holds it whenever the downstream side is ready. A head flit therefore spends
// one cycle in the queue and one in allocation before it leaves; the flits
// behind it follow at one per cycle.
//
// Interface: in_* and out_* are valid/ready links, one per port; a flit moves
// when valid and ready are both high in a clock cycle. in_ready comes straight
// from the queue's fill level. stat_alt pulses for an input granted its
// alternative output, stat_block for an input whose head flit waits.
//
// The paper gives wormhole switching, queues at the inputs, the 2x2 outer and
// larger middle routers, and adaptive routing in the MF networks; the one-cycle
// allocator, the round-robin order and the queue depth are this design's choices.
// The head-flit assertion at the end samples rst_n synchronously while the
// registers use it as an asynchronous reset; lint notes the mixed use, which
// concerns only the check.
module mf_router
  import mf_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter stage_e      STAGE = STAGE_MIDDLE,
  parameter int unsigned J     = 0,
  parameter int unsigned NP    = 4,
  parameter int unsigned DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NP-1:0] in_valid,
  input  flit_t         in_flit  [NP],
  output logic [NP-1:0] in_ready,
  output logic [NP-1:0] out_valid,
  output flit_t         out_flit [NP],
  input  logic [NP-1:0] out_ready,
  output logic [NP-1:0] stat_alt,
  output logic [NP-1:0] stat_block
);
  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;

  logic [NP-1:0] q_valid, q_pop;
  flit_t         q_flit [NP];
  logic [NP-1:0] prim [NP];
  logic [NP-1:0] alt  [NP];

  // Reservation state: which output an input holds, and the reverse map.
  logic [NP-1:0] in_busy, out_busy;
  logic [PW-1:0] in_port  [NP];
  logic [PW-1:0] out_owner[NP];
  logic [PW-1:0] rr_ptr;

  // Allocation results of this cycle.
  logic [NP-1:0] grant;
  logic [PW-1:0] grant_port [NP];
  logic [NP-1:0] taken;
  logic [PW-1:0] last_grant;
  logic          any_grant;

  for (genvar i = 0; i < NP; i++) begin : g_in
    flit_fifo #(.DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_flit  (in_flit[i]),
      .in_ready (in_ready[i]),
      .out_valid(q_valid[i]),
      .out_flit (q_flit[i]),
      .out_ready(q_pop[i])
    );
    mf_route #(.N(N), .STAGE(STAGE), .J(J), .NP(NP), .IN_PORT(i)) u_rt (
      .dest       (flit_dest(q_flit[i])),
      .primary    (prim[i]),
      .alternative(alt[i])
    );
  end

  // Round-robin allocator with adaptive fall-back.
  always_comb begin
    int unsigned idx;  // input visited, always below NP
    grant      = '0;
    taken      = out_busy;
    stat_alt   = '0;
    stat_block = '0;
    last_grant = rr_ptr;
    any_grant  = 1'b0;
    for (int unsigned i = 0; i < NP; i++) grant_port[i] = '0;
    for (int unsigned s = 1; s <= NP; s++) begin
      idx = (int'(rr_ptr) + s) % NP;
      if (q_valid[idx] && !in_busy[idx] && q_flit[idx].head) begin
        for (int unsigned o = 0; o < NP; o++) begin
          if (!grant[idx] && prim[idx][o] && !taken[o] && out_ready[o]) begin
            grant[idx]      = 1'b1;
            grant_port[idx] = PW'(o);
            taken[o]        = 1'b1;
          end
        end
        for (int unsigned o = 0; o < NP; o++) begin
          if (!grant[idx] && alt[idx][o] && !taken[o] && out_ready[o]) begin
            grant[idx]      = 1'b1;
            grant_port[idx] = PW'(o);
            taken[o]        = 1'b1;
            stat_alt[idx]   = 1'b1;
          end
        end
        if (grant[idx]) begin
          last_grant = PW'(idx);
          any_grant  = 1'b1;
        end else begin
          stat_block[idx] = 1'b1;
        end
      end
    end
  end

  // Crossbar: each held output carries its owner's queue head.
  always_comb begin
    for (int unsigned o = 0; o < NP; o++) begin
      out_valid[o] = out_busy[o] && q_valid[out_owner[o]];
      out_flit[o]  = q_flit[out_owner[o]];
    end
    for (int unsigned i = 0; i < NP; i++) begin
      q_pop[i] = in_busy[i] && q_valid[i] && out_ready[in_port[i]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_busy  <= '0;
      out_busy <= '0;
      rr_ptr   <= PW'(NP - 1);
      for (int unsigned i = 0; i < NP; i++) begin
        in_port[i]   <= '0;
        out_owner[i] <= '0;
      end
    end else begin
      if (any_grant) rr_ptr <= last_grant;
      for (int unsigned i = 0; i < NP; i++) begin
        if (grant[i]) begin
          in_busy[i]                <= 1'b1;
          in_port[i]                <= grant_port[i];
          out_busy[grant_port[i]]   <= 1'b1;
          out_owner[grant_port[i]]  <= PW'(i);
        end else if (q_pop[i] && q_flit[i].tail) begin
          in_busy[i]            <= 1'b0;
          out_busy[in_port[i]]  <= 1'b0;
        end
      end
    end
  end

  // A flit that reaches the front of an idle input must open a message.
  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_head_first : assert property (@(posedge clk) disable iff (!rst_n)
      (q_valid[i] && !in_busy[i]) |-> q_flit[i].head);
  end

endmodule
