// tb_mf_workloads: synthetic traffic on the 32-terminal MF-Butterfly at its
// default parameters.
//
// Three synthetic workloads are run, named after the distribution of the time
// between two messages of a source: uniform, exponential and normal. Every
// message has two flits and a destination drawn uniformly from the other
// terminals. The offered load is given in flits per cycle per terminal; a
// source with load r starts a message every 2/r cycles on average. Messages
// wait in an unbounded source queue until the network takes them, and their
// latency runs from creation to arrival of the tail flit.
// For each workload and load (0.1, 0.3, 0.5) the testbench checks that every
// message arrives once at its destination, that no latency is below the
// empty-network minimum of 7 cycles, and, at load 0.1, that the delivered
// throughput matches the offered load within 10 %. It prints the average
// latency and the throughput, the two quantities the network is judged by.
module tb_mf_workloads;
  import mf_pkg::*;
  localparam int unsigned N = 32;
  localparam int GEN_CYCLES = 1500;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Message bookkeeping; the id travels in the head flit's upper 16 bits.
  typedef struct { int src; int dst; int born; } msg_t;
  msg_t   msgs [$];
  int     srcq [N][$];
  bit     delivered [int];
  int     open_id [N];
  bit     open_msg [N];
  longint lat_sum;
  int     n_recv, lat_min, flits_recv;

  function automatic real gap(input int kind, input real mean);
    real u1, u2, g;
    u1 = (real'($urandom_range(1, 1000000))) / 1000000.0;
    u2 = (real'($urandom_range(1, 1000000))) / 1000000.0;
    case (kind)
      0: g = 2.0 * mean * u1;                                          // uniform
      1: g = -mean * $ln(u1);                                          // exponential
      default: g = mean + 0.25 * mean * $sqrt(-2.0 * $ln(u1)) * $cos(6.2831853 * u2); // normal
    endcase
    return (g < 0.0) ? 0.0 : g;
  endfunction

  // Delivery monitor.
  always @(negedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) begin
      if (ej_valid[d] && ej_ready[d]) begin
        flit_t f;
        f = ej_flit[d];
        flits_recv++;
        if (f.head) begin
          int id;
          id = int'(f.data[31:16]);
          check(!open_msg[d], "head only between messages");
          check(id < msgs.size() && msgs[id].dst == d, "message at its destination");
          check(!delivered.exists(id), "message delivered once");
          open_msg[d] = 1'b1;
          open_id[d]  = id;
        end else begin
          int lat;
          check(open_msg[d] && f.tail, "tail closes the message");
          check(f.data == 32'(open_id[d]), "tail payload intact");
          delivered[open_id[d]] = 1'b1;
          lat = cycle + 1 - msgs[open_id[d]].born;
          lat_sum += lat;
          if (lat < lat_min) lat_min = lat;
          n_recv++;
          open_msg[d] = 1'b0;
        end
      end
    end
  end

  // Sources: create messages on schedule, inject from the queue head.
  real    next_t [N];
  bit     gen_on;
  int     kind_now;
  real    mean_now;
  int     sent_flit [N];
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) begin
      // Flit accepted at the edge just gone: advance.
      if (inj_valid[s] && inj_ready_q[s]) begin
        if (sent_flit[s] == 1) begin
          sent_flit[s] = 0;
          void'(srcq[s].pop_front());
        end else sent_flit[s] = 1;
      end
      while (gen_on && next_t[s] <= real'(cycle)) begin
        int d;
        d = $urandom_range(0, N - 2);
        if (d >= s) d++;
        msgs.push_back('{src: s, dst: d, born: int'(next_t[s]) + 1});
        srcq[s].push_back(msgs.size() - 1);
        next_t[s] += gap(kind_now, mean_now);
      end
      if (srcq[s].size() > 0) begin
        int id;
        id = srcq[s][0];
        inj_valid[s] = 1'b1;
        if (sent_flit[s] == 0) inj_flit[s] = make_head(ADDR_W'(msgs[id].dst), ADDR_W'(s), 16'(id), 1'b0);
        else inj_flit[s] = '{head: 1'b0, tail: 1'b1, data: 32'(id)};
      end else inj_valid[s] = 1'b0;
    end
    inj_ready_q = inj_ready;   // what the coming edge will act on
  end
  logic [N-1:0] inj_ready_q;

  initial begin
    string names [3];
    real   loads [3];
    names = '{"uniform", "exponential", "normal"};
    loads = '{0.1, 0.3, 0.5};
    inj_valid = '0;
    inj_ready_q = '0;
    ej_ready  = '1;
    gen_on = 1'b0;
    for (int s = 0; s < N; s++) begin
      inj_flit[s] = '0; open_msg[s] = 1'b0; open_id[s] = 0; sent_flit[s] = 0; next_t[s] = 0.0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    $display("workload      load  messages  avg latency  min latency  throughput (flits/cycle/terminal)");
    for (int k = 0; k < 3; k++) begin
      for (int l = 0; l < 3; l++) begin
        int t0, first_id;
        real thr;
        @(negedge clk);
        first_id = msgs.size();
        lat_sum = 0; n_recv = 0; lat_min = 1 << 30; flits_recv = 0;
        kind_now = k;
        mean_now = 2.0 / loads[l];
        t0 = cycle;
        for (int s = 0; s < N; s++) next_t[s] = real'(cycle) + gap(k, mean_now);
        gen_on = 1'b1;
        repeat (GEN_CYCLES) @(negedge clk);
        gen_on = 1'b0;
        thr = real'(flits_recv) / real'(GEN_CYCLES * N);
        while (n_recv < msgs.size() - first_id && cycle - t0 < 40000) @(negedge clk);
        check(n_recv == msgs.size() - first_id, "every message delivered");
        check(lat_min >= 7, "no latency below the empty-network minimum");
        if (l == 0) check(thr > 0.9 * loads[l] && thr < 1.1 * loads[l], "throughput follows a light load");
        $display("%-12s  %4.2f  %8d  %11.1f  %11d  %6.3f", names[k], loads[l], n_recv,
                 real'(lat_sum) / real'(n_recv), lat_min, thr);
        repeat (10) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
