// tb_mf_full: end-to-end test of the MF-Butterfly network with 32 terminals (all parameters at their defaults).
//
// Every source sends one two-flit message to every destination (32 x 32
// messages), with random gaps at the sources and random back-pressure at the
// destinations. A reference model in the testbench says where each message
// must come out; the testbench checks that each arrives exactly once, on the
// right terminal, with its head and tail flits back to back and intact.
// Before that, lone messages through an empty network check the latency: a
// flit spends two cycles per router, so the head of a message that takes s
// side links arrives 2*(3+s) cycles after it was injected, the tail one cycle
// later. The number of side links is worked out here from the wiring.
// Each mechanism of the design is counted and must occur at least once:
// side-link hops, adaptive (alternative) grants, heads waiting for a busy
// output, and injection stalls from full queues.
module tb_mf_full;
  import mf_pkg::*;
  localparam int unsigned N = 32;
  localparam int unsigned G = N / 4;
  localparam int unsigned NB = $clog2(N);

  logic         clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t        inj_flit [N], ej_flit [N];
  int           checks = 0, failures = 0, cycle = 0;

  mf_butterfly dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at cycle %0d", what, cycle);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Side links a message from src to dst must take: it enters middle router
  // k = (src/2) mod G of its half and must reach pair ((dst/2) mod G) / 2.
  function automatic int side_hops(input int src, input int dst);
    int k, p;
    k = (src / 2) % G;
    p = ((dst / 2) % G) / 2;
    if (k / 2 == p) return 0;
    if (k / 2 < p) return 2 * p - k;
    return k - (2 * p + 1);
  endfunction

  // Mechanism counters, sampled at the falling edge.
  longint n_side = 0, n_alt = 0, n_wait = 0, n_stall = 0;
  always @(negedge clk) if (rst_n) begin
    n_side  <= n_side + side_now();
    n_alt   <= n_alt + alt_now();
    n_wait  <= n_wait + wait_now();
    n_stall <= n_stall + $countones(inj_valid & ~inj_ready);
  end

  function automatic int side_now();
    int c = 0;
    for (int j = 0; j < N / 2; j++)
      c += int'(dut.m_ov[j][P_UP] & dut.m_or[j][P_UP]) + int'(dut.m_ov[j][P_DOWN] & dut.m_or[j][P_DOWN]);
    return c;
  endfunction
  function automatic int alt_now();
    int c = 0;
    for (int j = 0; j < N / 2; j++) c += $countones(dut.m_alt[j]);
    return c;
  endfunction
  function automatic int wait_now();
    int c = 0;
    for (int j = 0; j < N / 2; j++)
      c += $countones(dut.m_blk[j]) + $countones(dut.f_blk[j]) + $countones(dut.l_blk[j]);
    return c;
  endfunction

  // Delivery monitor.
  bit  got [N][N];
  bit  open_msg [N];
  int  open_src [N];
  int  recv = 0;
  int  last_head_cycle [N];
  always @(negedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) begin
      if (ej_valid[d] && ej_ready[d]) begin
        flit_t f;
        f = ej_flit[d];
        if (!open_msg[d]) begin
          int s;
          s = int'(flit_src(f));
          check(f.head && !f.tail, "message starts with its head flit");
          check(int'(flit_dest(f)) == d, "delivered to its destination");
          check(s < N && !got[s][d], "message delivered once");
          if (s < N) got[s][d] = 1'b1;
          check(f.data[31:16] == 16'(s * N + d), "head payload intact");
          open_msg[d] = 1'b1;
          open_src[d] = s;
          last_head_cycle[d] = cycle + 1;
        end else begin
          check(!f.head && f.tail, "tail follows the head");
          check(f.data == 32'(open_src[d] * 1000 + d), "tail payload intact");
          check(cycle + 1 == last_head_cycle[d] + 1 || !ej_ready_always,
                "tail right behind the head");
          open_msg[d] = 1'b0;
          recv++;
        end
      end
    end
  end

  bit ej_ready_always = 1'b1;
  bit random_bp = 1'b0;
  always @(posedge clk) if (random_bp) ej_ready <= #2 N'({$urandom, $urandom}) | N'({$urandom, $urandom});

  // Sends one message from s to d, presenting flits at the falling edge.
  task automatic send(input int s, input int d);
    flit_t f;
    f = make_head(ADDR_W'(d), ADDR_W'(s), 16'(s * N + d), 1'b0);
    inj_valid[s] = 1'b1;
    inj_flit[s]  = f;
    #1;
    while (!inj_ready[s]) @(negedge clk);
    @(negedge clk);
    f.head = 1'b0;
    f.tail = 1'b1;
    f.data = 32'(s * 1000 + d);
    inj_flit[s] = f;
    #1;
    while (!inj_ready[s]) @(negedge clk);
    @(negedge clk);
    inj_valid[s] = 1'b0;
  endtask

  task automatic source(input int s);
    for (int k = 0; k < N; k++) begin
      send(s, (s + k * 7 + 3) % N);
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
    end
  endtask

  initial begin
    int t0, expect_lat, total, tstart;
    inj_valid = '0;
    ej_ready  = '1;
    for (int s = 0; s < N; s++) begin
      inj_flit[s] = '0; open_msg[s] = 1'b0; open_src[s] = 0; last_head_cycle[s] = 0;
      for (int d = 0; d < N; d++) got[s][d] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1. Latency through an empty network, for sources and destinations that
    // need no side link and the most side links.
    for (int t = 0; t < 4; t++) begin
      int s, d;
      case (t)
        0: begin s = 0;     d = 1;     end
        1: begin s = 0;     d = N / 2 - 1; end
        2: begin s = N - 1; d = N / 2; end
        default: begin s = 5 % N; d = N - 3; end
      endcase
      expect_lat = 2 * (3 + side_hops(s, d));
      t0 = cycle + 1;
      fork send(s, d); join_none
      while (!(ej_valid[d] && ej_flit[d].head)) @(negedge clk);
      check(cycle + 1 - t0 == expect_lat, $sformatf("head latency %0d->%0d", s, d));
      @(negedge clk);
      check(ej_valid[d] && ej_flit[d].tail, "tail one cycle behind the head");
      repeat (4) @(negedge clk);
      got[s][d] = 1'b0;
    end
    check(recv == 4, "lone messages delivered");
    recv = 0;

    // 2. All-to-all traffic with back-pressure at the destinations.
    ej_ready_always = 1'b0;
    random_bp = 1'b1;
    tstart = cycle;
    for (int s = 0; s < N; s++) begin
      automatic int ss = s;
      fork source(ss); join_none
    end
    wait fork;
    while (recv < N * N && cycle - tstart < 200000) @(negedge clk);
    random_bp = 1'b0;
    total = 0;
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++) total += int'(got[s][d]);
    check(total == N * N, "every source reached every destination");
    check(recv == N * N, "message count");
    check(n_side > 0, "side links used");
    check(n_alt > 0, "adaptive alternative taken");
    check(n_wait > 0, "heads waited for a busy output");
    check(n_stall > 0, "injection stalled on a full queue");
    $display("%0d messages in %0d cycles; side-link flit transfers %0d, alternative grants %0d, waits %0d, stalls %0d",
             recv, cycle - tstart, n_side, n_alt, n_wait, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
