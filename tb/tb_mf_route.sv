// tb_mf_route: self-checking test of the routing unit for all routers of a
// 32-terminal MF-Butterfly.
//
// One routing unit is built for every router and input of the three stages.
// For every destination the testbench checks each unit's choice against the
// network's wiring, worked out here from the terminal and router numbering
// rather than from the routing rule:
//  * a first-stage output must lead to the half that holds the destination's
//    last router, and a last-stage output to the destination terminal;
//  * in the middle stage, following the primary choices from any router of the
//    right half, entered from the first stage, must leave on the output wired to the
//    destination's last router within G = N/4 side hops, never bouncing back;
//  * an alternative, where offered, must be the side link to the partner router
//    that feeds the same last routers, and never the link the flit came from.
module tb_mf_route;
  import mf_pkg::*;
  localparam int unsigned N = 32;
  localparam int unsigned R = N / 2;
  localparam int unsigned G = N / 4;

  logic [ADDR_W-1:0] dest;
  logic [3:0] mp [R][4], ma [R][4];
  logic [1:0] fp [R][2], fa [R][2], lp [R][2], la [R][2];
  int checks = 0, failures = 0;

  for (genvar j = 0; j < R; j++) begin : g_r
    for (genvar i = 0; i < 4; i++) begin : g_mid
      mf_route #(.N(N), .STAGE(STAGE_MIDDLE), .J(j), .NP(4), .IN_PORT(i)) u (
        .dest, .primary(mp[j][i]), .alternative(ma[j][i]));
    end
    for (genvar i = 0; i < 2; i++) begin : g_outer
      mf_route #(.N(N), .STAGE(STAGE_FIRST), .J(j), .NP(2), .IN_PORT(i)) uf (
        .dest, .primary(fp[j][i]), .alternative(fa[j][i]));
      mf_route #(.N(N), .STAGE(STAGE_LAST), .J(j), .NP(2), .IN_PORT(i)) ul (
        .dest, .primary(lp[j][i]), .alternative(la[j][i]));
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (dest %0d)", what, dest);
    end
  endtask

  function automatic int onehot_idx(input logic [3:0] m);
    for (int k = 0; k < 4; k++) if (m == 4'(1 << k)) return k;
    return -1;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < N; d++) begin
      int last_r, half;
      dest = ADDR_W'(d);
      #1;
      last_r = d / 2;
      half   = last_r / G;
      for (int j = 0; j < R; j++) begin
        for (int i = 0; i < 2; i++) begin
          int o;
          o = onehot_idx({2'b00, fp[j][i]});
          // First router j, output o, reaches middle router (j mod G) + o*G.
          check(o >= 0 && (((j % G) + o * G) / G) == half, "first stage half");
          check(fa[j][i] == '0, "first stage has no alternative");
          o = onehot_idx({2'b00, lp[j][i]});
          if (j == last_r) check(o >= 0 && 2 * j + o == d, "last stage terminal");
          check(la[j][i] == '0, "last stage has no alternative");
        end
      end
      // Middle stage: walk from every router of the right half and every input.
      for (int m0 = half * G; m0 < (half + 1) * G; m0++) begin
        for (int i0 = 0; i0 < 2; i0++) begin
          int m, ip, hops, o, a;
          bit done;
          m = m0; ip = i0; hops = 0; done = 0;
          while (!done && hops <= G) begin
            o = onehot_idx(mp[m][ip]);
            a = (ma[m][ip] == '0) ? -1 : onehot_idx(ma[m][ip]);
            if (a >= 0) begin
              // Alternative: side link to the partner, which feeds the same
              // last routers, and not back where the flit came from.
              check(((m % 2 == 0) && a == P_DOWN) || ((m % 2 == 1) && a == P_UP),
                    "alternative leads to the partner router");
              check(a != ip, "alternative does not return the way it came");
              check((m / 2) == (last_r / 2), "alternative only in the target pair");
              begin
                // Take it: the partner must exit toward the same last router
                // and offer no way back.
                int pm, pip, po;
                pm  = (a == P_DOWN) ? m + 1 : m - 1;
                pip = (a == P_DOWN) ? P_UP : P_DOWN;
                po  = onehot_idx(mp[pm][pip]);
                check((po == 0 || po == 1) && (pm / 2) * 2 + po == last_r,
                      "partner exits toward the last router");
                check(ma[pm][pip] == '0, "partner offers no way back");
              end
            end
            if (o == 0 || o == 1) begin
              // Middle router m, output o, reaches last router (m & ~1) + o.
              check((m / 2) * 2 + o == last_r, "middle exit reaches the last router");
              done = 1;
            end else if (o == P_DOWN) begin
              check((m % G) != G - 1, "no down link at the chain end");
              check(ip != P_DOWN, "no bounce back down");
              m = m + 1; ip = P_UP; hops++;
            end else if (o == P_UP) begin
              check((m % G) != 0, "no up link at the chain start");
              check(ip != P_UP, "no bounce back up");
              m = m - 1; ip = P_DOWN; hops++;
            end else begin
              check(1'b0, "primary is one-hot");
              done = 1;
            end
          end
          check(done && hops < G, "middle walk ends within the chain");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
