// tb_mf_router: self-checking test of one middle-stage wormhole router.
//
// The router under test is middle router 1 of a 16-terminal MF-Butterfly
// (pair 0 of the upper half; side links to routers 0 and 2). Its exits 0 and 1
// lead to last routers 0 and 1, i.e. destinations 0-1 and 2-3.
// Checked:
//  * latency: a lone head flit leaves two clock edges after it was accepted,
//    and its tail one edge later;
//  * adaptive routing: with the primary exit held not-ready, a message for
//    this pair leaves on the side link to router 0 instead;
//  * a message from router 0 (arriving on the side port from the partner) may
//    not be sent back;
//  * random traffic with random back-pressure on all four inputs: every
//    message arrives whole, its flits in order and not interleaved with
//    another message on the same output, on an output allowed by the wiring.
module tb_mf_router;
  import mf_pkg::*;
  localparam int unsigned N  = 16;
  localparam int unsigned NP = 4;
  localparam int unsigned J  = 1;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready, stat_alt, stat_block;
  flit_t         in_flit [NP], out_flit [NP];
  int            checks = 0, failures = 0;
  int            cycle = 0;

  mf_router #(.N(N), .STAGE(STAGE_MIDDLE), .J(J), .NP(NP), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at cycle %0d", what, cycle);
      if (failures < 20) for (int q = 0; q < NP; q++) $display("  out%0d v%0d r%0d h%0d t%0d data %h", q, out_valid[q], out_ready[q], out_flit[q].head, out_flit[q].tail, out_flit[q].data);
    end
  endtask

  // Which outputs the wiring allows for a destination, given the input.
  // Exit o of middle router 1 goes to last router o (destinations 2o, 2o+1);
  // port 2 goes to router 0 (the partner, same last routers), port 3 to
  // router 2 (pair 1, last routers 2 and 3).
  function automatic logic [NP-1:0] allowed(input int d, input int ip);
    logic [NP-1:0] a;
    a = '0;
    if (d / 4 == 0) begin
      a[d / 2] = 1'b1;
      if (ip != P_UP) a[P_UP] = 1'b1;
    end else begin
      a[P_DOWN] = 1'b1;
    end
    return a;
  endfunction

  // Legal destinations per input: from port 2 (router 0, moving down) any
  // destination 0..7; from port 3 (router 2, moving up) only pair 0 (0..3).
  function automatic int pick_dest(input int ip);
    if (ip == P_DOWN) return $urandom_range(0, 3);
    return $urandom_range(0, 7);
  endfunction

  // Per-input message streams, generated up front.
  typedef struct { int dest; int len; int id; } msg_t;
  msg_t  plan [NP][$];
  int    sent_msgs = 0, recv_msgs = 0;
  // Per-output reassembly state.
  int    cur_id [NP], cur_len [NP], cur_pos [NP], cur_dest [NP], cur_in [NP];
  bit    in_msg [NP];
  int    id_in [int];     // message id -> input it was sent on
  int    id_len [int];
  int    id_dest [int];
  int    alt_seen = 0, block_seen = 0;

  // All sampling is done at the falling edge, where every signal holds the
  // value the next rising edge will act on.
  always @(negedge clk) if (rst_n) begin
    alt_seen   <= alt_seen + $countones(stat_alt);
    block_seen <= block_seen + $countones(stat_block);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t mk(input int id, input int k, input int len, input int dest, input int src);
    flit_t f;
    if (k == 0) f = make_head(ADDR_W'(dest), ADDR_W'(src), 16'(id), len == 1);
    else begin
      f.head = 1'b0;
      f.tail = (k == len - 1);
      f.data = 32'(id * 16 + k);
    end
    return f;
  endfunction

  // Monitor outputs: check wormhole order and allowed port.
  always @(negedge clk) if (rst_n && !mon_off) begin
    for (int o = 0; o < NP; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        flit_t f;
        f = out_flit[o];
        if (!in_msg[o]) begin
          int id;
          id = int'(f.data[31:16]);
          check(f.head, "message starts with a head flit");
          check(id_in.exists(id), "known message");
          if (id_in.exists(id)) begin
            check(allowed(id_dest[id], id_in[id])[o], "output allowed by wiring");
            check(int'(flit_dest(f)) == id_dest[id], "destination field intact");
            cur_id[o] = id; cur_len[o] = id_len[id]; cur_pos[o] = 1;
            if (id_len[id] == 1) begin
              check(f.tail, "single-flit message has tail");
              recv_msgs++;
            end else in_msg[o] = 1;
          end
        end else begin
          check(!f.head, "no head inside a message");
          check(f.data == 32'(cur_id[o] * 16 + cur_pos[o]), "body flit in order, same message");
          cur_pos[o]++;
          if (cur_pos[o] == cur_len[o]) begin
            check(f.tail, "tail at message end");
            in_msg[o] = 0;
            recv_msgs++;
          end else check(!f.tail, "no early tail");
        end
      end
    end
  end

  bit mon_off = 1'b1;

  task automatic send_one(input int ip, input int id, input int dest, input int len);
    id_in[id] = ip; id_len[id] = len; id_dest[id] = dest;
    for (int k = 0; k < len; k++) begin
      in_valid[ip] = 1'b1;
      in_flit[ip]  = mk(id, k, len, dest, ip);
      #1;
      while (!in_ready[ip]) @(negedge clk);
      @(negedge clk);             // taken at the rising edge in between
    end
    in_valid[ip] = 1'b0;
  endtask

  bit random_bp = 1'b0;
  always @(posedge clk) if (random_bp) out_ready <= #2 4'($urandom);

  task automatic drive_input(input int p);
    for (int m = 0; m < 150; m++) begin
      send_one(p, 100 + p * 1000 + m, pick_dest(p), $urandom_range(1, 4));
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
  endtask

  initial begin
    int t0;
    in_valid  = '0;
    out_ready = '0;
    for (int i = 0; i < NP; i++) begin
      in_flit[i] = '0; in_msg[i] = 0; cur_id[i] = 0; cur_len[i] = 0; cur_pos[i] = 0;
      cur_dest[i] = 0; cur_in[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    mon_off = 1'b0;

    // 1. Latency of a lone two-flit message, input 0 to destination 2 (exit 1).
    out_ready = '1;
    id_in[1] = 0; id_len[1] = 2; id_dest[1] = 2;
    in_valid[0] = 1'b1;
    in_flit[0]  = mk(1, 0, 2, 2, 0);
    t0 = cycle + 1;                     // head taken at the next rising edge
    @(negedge clk);
    in_flit[0]  = mk(1, 1, 2, 2, 0);
    @(negedge clk);
    in_valid[0] = 1'b0;
    while (!(out_valid[1] && out_flit[1].head)) @(negedge clk);
    check(cycle + 1 - t0 == 2, "head crosses the router in two cycles");
    @(negedge clk);
    check(out_valid[1] && out_flit[1].tail, "tail follows one cycle behind");
    repeat (3) @(negedge clk);

    // 2. Adaptive: exit 0 not ready, message for destination 1 from input 1.
    out_ready = 4'b1110;
    fork send_one(1, 2, 1, 2); join
    repeat (6) @(negedge clk);
    check(alt_seen > 0, "alternative output granted when the primary is blocked");
    check(recv_msgs == 2, "blocked-primary message delivered via side link");
    // 3. From the partner (port 2) with exit 0 blocked: must wait, not go back.
    fork send_one(P_UP, 3, 0, 2); join
    repeat (6) @(negedge clk);
    check(recv_msgs == 2, "message from partner waits for its exit");
    out_ready = '1;
    repeat (6) @(negedge clk);
    check(recv_msgs == 3, "message from partner leaves by its exit");

    // 4. Random traffic on all inputs with random back-pressure.
    sent_msgs = 3;
    random_bp = 1'b1;
    fork
      drive_input(0);
      drive_input(1);
      drive_input(2);
      drive_input(3);
    join
    random_bp = 1'b0;
    sent_msgs += NP * 150;
    out_ready = '1;
    repeat (50) @(negedge clk);
    check(recv_msgs == sent_msgs, "every message delivered");
    check(block_seen > 0, "contention seen");
    $display("router: %0d messages, %0d alternative grants, %0d blocked cycles",
             recv_msgs, alt_seen, block_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
