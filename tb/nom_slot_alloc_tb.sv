// nom_slot_alloc_tb: checks the slot-allocation accelerator (8x8x4 mesh,
// 16 slots) against an independent reference.
//
// The testbench keeps its own occupancy model. For each random search it
// finds, by dynamic programming over the shortest-path box, which start
// slots have a collision-free circuit (links, destination ejection port and
// the source/destination vault-bus slots), and expects the first of them at
// or after cur_slot + 3. The returned path must be a shortest path whose
// every (router, output, slot) is free in the model. Committed circuits are
// added to the model and later released at random, so searches run on a
// crowded network. The first search on the idle network checks the
// worked example of a 4-hop circuit picked up in slot 0: start slot 3,
// ejection in slot 7, path south, south, down, down.
module nom_slot_alloc_tb;
  import nom_pkg::*;

  localparam int MX = 8, MY = 8, MZ = 4, S = 16, NODES = 256, MAXH = 17;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             srch_vld, found, commit, rel_vld;
  logic [7:0]       srch_src, srch_dst, rel_src;
  logic [3:0]       cur_slot, start_slot, wait_slots, rel_slot;
  logic [4:0]       hops, rel_hops;
  port_e            dirs [MAXH];
  port_e            rel_dirs [MAXH];

  nom_slot_alloc dut (.*);

  bit Vr [NODES][7][S];
  bit VBr [32][S];
  int checks = 0, failures = 0;

  typedef struct { int src; int hops; int slot; port_e d [MAXH]; } circ_t;
  circ_t live [$];

  function automatic int cx(int n); return n % MX; endfunction
  function automatic int cy(int n); return (n / MX) % MY; endfunction
  function automatic int cz(int n); return n / (MX*MY); endfunction
  function automatic int vlt(int n); return cy(n)*(MX/2) + cx(n)/2; endfunction
  function automatic int mdist(int a, int b);
    int dx = cx(a) - cx(b), dy = cy(a) - cy(b), dz = cz(a) - cz(b);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy) + (dz < 0 ? -dz : dz);
  endfunction
  function automatic int nstep(int n, port_e d);
    case (d)
      P_E: return n + 1;       P_W: return n - 1;
      P_N: return n + MX;      P_S: return n - MX;
      P_U: return n + MX*MY;   P_D: return n - MX*MY;
      default: return -1;
    endcase
  endfunction
  function automatic bit on_grid(int n, port_e d);
    case (d)
      P_E: return cx(n) < MX-1;  P_W: return cx(n) > 0;
      P_N: return cy(n) < MY-1;  P_S: return cy(n) > 0;
      P_U: return cz(n) < MZ-1;  P_D: return cz(n) > 0;
      default: return 0;
    endcase
  endfunction

  // ok[n][k]: from node n, holding slot k there, the destination can be reached
  bit okt [NODES][S];
  function automatic int ref_start(int src, int dst, int cur, output int w_out);
    int D = mdist(src, dst);
    for (int n = 0; n < NODES; n++) for (int k = 0; k < S; k++) okt[n][k] = 0;
    for (int r = 0; r <= D; r++) begin            // r = remaining distance
      for (int n = 0; n < NODES; n++) begin
        if (mdist(n, dst) != r || mdist(src, n) + r != D) continue;
        for (int k = 0; k < S; k++) begin
          if (r == 0) okt[n][k] = !Vr[n][P_L][k] && !VBr[vlt(dst)][(k+1)%S];
          else for (int p = 0; p < 6; p++) begin
            if (!on_grid(n, port_e'(p))) continue;
            if (mdist(nstep(n, port_e'(p)), dst) != r-1) continue;
            if (!Vr[n][p][k] && okt[nstep(n, port_e'(p))][(k+1)%S]) okt[n][k] = 1;
          end
        end
      end
    end
    for (int w = 0; w < S; w++) begin
      int s = (cur + 3 + w) % S;
      if (VBr[vlt(src)][(s+S-1)%S]) continue;
      if (vlt(src) == vlt(dst) && (D + 2) % S == 0) continue;
      if (okt[src][s]) begin w_out = w; return s; end
    end
    w_out = -1;
    return -1;
  endfunction

  task automatic mark(int src, int h, int s, port_e d [MAXH], bit val);
    int n = src;
    VBr[vlt(src)][(s+S-1)%S] = val;
    for (int i = 0; i < h; i++) begin
      Vr[n][d[i]][(s+i)%S] = val;
      n = nstep(n, d[i]);
    end
    Vr[n][P_L][(s+h)%S] = val;
    VBr[vlt(n)][(s+h+1)%S] = val;
  endtask

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  int n_found = 0, n_full = 0, n_late = 0;

  initial begin
    srch_vld = 0; commit = 0; rel_vld = 0; srch_src = 0; srch_dst = 0; cur_slot = 0;
    rel_src = 0; rel_hops = 0; rel_slot = 0;
    for (int h = 0; h < MAXH; h++) rel_dirs[h] = P_NONE;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // worked example: 4 hops, picked up in slot 0 -> start 3, eject 7
    srch_vld = 1; srch_src = 8'((3*MY + 5)*MX + 2); srch_dst = 8'((1*MY + 3)*MX + 2); cur_slot = 0;
    #1;
    chk(found && start_slot == 3 && hops == 4, "idle-network example");
    chk(dirs[0] == P_S && dirs[1] == P_S && dirs[2] == P_D && dirs[3] == P_D, "example path S,S,D,D");

    for (int it = 0; it < 600; it++) begin
      automatic int s, d, exp_s, exp_w, n;
      automatic bit ok;
      @(negedge clk);
      // crowd a small corner so that slots run out
      s = ($urandom % 3) + MX*($urandom % 3) + MX*MY*($urandom % 2);
      do d = ($urandom % 4) + MX*($urandom % 4) + MX*MY*($urandom % 4); while (d == s);
      srch_vld = 1; srch_src = 8'(s); srch_dst = 8'(d); cur_slot = 4'($urandom);
      commit = ($urandom % 4) != 0;
      rel_vld = 0;
      if (live.size() > 0 && ($urandom % 3) == 0) begin
        automatic int idx = $urandom % live.size();
        rel_vld = 1; rel_src = 8'(live[idx].src); rel_hops = 5'(live[idx].hops);
        rel_slot = 4'(live[idx].slot);
        for (int h = 0; h < MAXH; h++) rel_dirs[h] = live[idx].d[h];
      end
      #1;
      exp_s = ref_start(s, d, int'(cur_slot), exp_w);
      chk(found == (exp_s >= 0), $sformatf("it %0d found %0d expected %0d", it, found, exp_s >= 0));
      if (exp_s < 0) n_full++;
      if (found && exp_s >= 0) begin
        n_found++;
        if (exp_w > 0) n_late++;
        chk(int'(start_slot) == exp_s && int'(wait_slots) == exp_w,
            $sformatf("it %0d start %0d expected %0d", it, start_slot, exp_s));
        chk(int'(hops) == mdist(s, d), "hop count");
        // walk the returned path
        n = s; ok = 1;
        for (int h = 0; h < int'(hops); h++) begin
          if (!on_grid(n, dirs[h]) || mdist(nstep(n, dirs[h]), d) != mdist(n, d) - 1) ok = 0;
          else begin
            if (Vr[n][dirs[h]][(int'(start_slot)+h)%S]) ok = 0;
            n = nstep(n, dirs[h]);
          end
        end
        chk(ok && n == d && !Vr[d][P_L][(int'(start_slot)+int'(hops))%S],
            $sformatf("it %0d path not free or not shortest", it));
      end
      @(posedge clk);
      if (rel_vld) begin
        foreach (live[i]) if (live[i].src == int'(rel_src) && live[i].slot == int'(rel_slot) &&
                              live[i].hops == int'(rel_hops)) begin
          mark(live[i].src, live[i].hops, live[i].slot, live[i].d, 0);
          live.delete(i);
          break;
        end
      end
      if (commit && found) begin
        automatic circ_t c;
        c.src = s; c.hops = int'(hops); c.slot = int'(start_slot);
        for (int h = 0; h < MAXH; h++) c.d[h] = dirs[h];
        mark(c.src, c.hops, c.slot, c.d, 1);
        live.push_back(c);
      end
      #1 srch_vld = 0; commit = 0; rel_vld = 0;
    end
    $display("searches found=%0d later_than_earliest=%0d none_free=%0d", n_found, n_late, n_full);
    chk(n_late > 0 && n_full > 0, "contention never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
