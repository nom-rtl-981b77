// nom_ccu_tb: checks the circuit control unit on its own (8x8x4 mesh).
//
// A stream of random copy requests (some sharing one source bank to crowd
// its vault) is offered. For every request the testbench records the cycle
// the CCU picks it up and then checks, independently of the CCU's internals:
//  - the sideband entries written for it form one chain from the source
//    (input L) to the destination (output L) over a shortest path, with
//    consecutive slots, each entry written before the cycle it is used;
//  - no (router, output, slot) is ever held by two live circuits;
//  - the start cycle T is at least pick-up + 3 and falls in the start slot;
//  - copy reads reach the source vault at T-2 + 16w and copy writes the
//    destination vault at T+h + 16w for word w, with the right bank and
//    address, and no other copy command is issued;
//  - done arrives at T + 16(len-1) + h + 2 with the right tag (a few cycles
//    later when several circuits finish together: one is released per cycle).
// Copies of two words or more take a second circuit for their second half
// when one is free, else the first circuit carries the whole copy; done comes
// once, after both halves. Requests that wait (stall), several live circuits,
// split copies and split attempts that fall back must all occur. The second
// half of the requests arrive back to back and are longer, to fill the CCU.
module nom_ccu_tb;
  import nom_pkg::*;

  localparam int MX = 8, MY = 8, MZ = 4, S = 16, NREQ = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_vld, req_ready, done_vld, stall;
  copy_req_t req;
  logic [7:0] done_tag;
  logic [3:0] cur_slot;
  logic [3:0] active;
  sb_cfg_t sb [32];
  vreq_t   cp_cmd [32];

  nom_ccu dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;  // cycles since reset = TDM time

  function automatic int cx(int n); return n % MX; endfunction
  function automatic int cy(int n); return (n / MX) % MY; endfunction
  function automatic int cz(int n); return n / (MX*MY); endfunction
  function automatic int vlt(int n); return cy(n)*(MX/2) + cx(n)/2; endfunction
  function automatic int vbk(int n); return cz(n)*2 + cx(n)%2; endfunction
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

  typedef struct {
    copy_req_t r;      // addresses and length of this circuit's share
    int        tag;
    longint    pick, T;
    int        h;
    int        en_node [$];
    int        en_slot [$];
    port_e     en_in [$];
    port_e     en_out [$];
    longint    en_cyc [$];
  } rec_t;

  rec_t recs [int];       // by circuit (allocation number)
  int   parts [int];      // live circuits per tag
  int   fin_keys [$];
  longint last_end [int]; // latest finishing time among a tag's circuits
  int   prog_tag = -1, n_alloc = 0, first_key = -1;
  int   owner [256][7][S];
  int   n_done = 0, m_stall = 0, m_conc = 0, m_rel_wait = 0, split_two = 0, split_alone = 0;

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, m); end
  endtask

  always @(negedge clk) if (rst_n) begin
    automatic int exp_cmds = 0, got_cmds = 0;
    if (stall) m_stall++;
    if (active >= 2) m_conc++;
    // second-half search gave nothing: the first circuit takes the whole copy
    if (dut.split_done && !dut.take && first_key >= 0) begin
      recs[first_key].r.len = dut.rq_head.len;
      split_alone++;
    end
    if (dut.split_done) first_key = -1;
    // circuit allocation
    if (dut.take) begin
      automatic rec_t x;
      x.r = dut.rq_head; x.tag = int'(x.r.tag); x.pick = cyc;
      x.r.src_addr = x.r.src_addr + 21'(dut.alloc_off);
      x.r.dst_addr = x.r.dst_addr + 21'(dut.alloc_off);
      x.r.len = dut.alloc_len;
      x.h = mdist(int'(x.r.src), int'(x.r.dst));
      x.T = cyc + 3 + longint'(dut.a_wait);
      chk(x.T % S == longint'(dut.a_start), "start cycle not in start slot");
      chk(x.r.len != 0, "empty circuit");
      if (dut.split) begin
        chk(parts.exists(x.tag) && parts[x.tag] == 1, "second half without first");
        split_two++;
      end
      if (dut.first_half) first_key = n_alloc;
      recs[n_alloc] = x;
      parts[x.tag] = parts.exists(x.tag) ? parts[x.tag] + 1 : 1;
      prog_tag = n_alloc;
      n_alloc++;
    end
    // sideband
    for (int v = 0; v < 32; v++) if (sb[v].vld) begin
      automatic int n = (int'(sb[v].bank)/2*MY + v/(MX/2))*MX + (v%(MX/2))*2 + int'(sb[v].bank)%2;
      chk(prog_tag >= 0, "sideband write without request");
      if (prog_tag >= 0) begin
        recs[prog_tag].en_node.push_back(n);
        recs[prog_tag].en_slot.push_back(int'(sb[v].slot));
        recs[prog_tag].en_in.push_back(sb[v].in_p);
        recs[prog_tag].en_out.push_back(sb[v].out_p);
        recs[prog_tag].en_cyc.push_back(cyc);
        chk(owner[n][sb[v].out_p][sb[v].slot] == 0,
            $sformatf("slot %0d of output %0d at node %0d already held by circuit %0d",
                      sb[v].slot, sb[v].out_p, n, owner[n][sb[v].out_p][sb[v].slot] - 1));
        owner[n][sb[v].out_p][sb[v].slot] = prog_tag + 1;
      end
    end
    // copy commands
    foreach (recs[t]) begin
      for (int w = 0; w < int'(recs[t].r.len); w++) begin
        if (cyc == recs[t].T - 2 + 16*w) begin
          automatic vreq_t c = cp_cmd[vlt(int'(recs[t].r.src))];
          exp_cmds++;
          chk(c.vld && !c.we && c.copy && int'(c.bank) == vbk(int'(recs[t].r.src)) &&
              c.addr == recs[t].r.src_addr + 21'(w), $sformatf("copy read of tag %0d word %0d", t, w));
        end
        if (cyc == recs[t].T + recs[t].h + 16*w) begin
          automatic vreq_t c = cp_cmd[vlt(int'(recs[t].r.dst))];
          exp_cmds++;
          chk(c.vld && c.we && c.copy && int'(c.bank) == vbk(int'(recs[t].r.dst)) &&
              c.addr == recs[t].r.dst_addr + 21'(w), $sformatf("copy write of tag %0d word %0d", t, w));
        end
      end
    end
    for (int v = 0; v < 32; v++) if (cp_cmd[v].vld) got_cmds++;
    chk(got_cmds == exp_cmds, $sformatf("%0d copy commands, expected %0d", got_cmds, exp_cmds));
    // circuits whose last write went out in this cycle are finished
    fin_keys.delete();
    foreach (recs[k]) begin
      if (cyc == recs[k].T + recs[k].h + 16*(longint'(recs[k].r.len)-1)) begin
        automatic rec_t x = recs[k];
        automatic int t = x.tag;
        automatic int n = int'(x.r.src);
        automatic bit ok = x.en_node.size() == x.h + 1;
        chk(x.T >= x.pick + 3, "start earlier than pick-up + 3");
        // entries in path order: find entry for each hop
        for (int h = 0; h <= x.h && ok; h++) begin
          automatic int e = -1;
          for (int i = 0; i < x.en_node.size(); i++)
            if (x.en_node[i] == n && x.en_slot[i] == int'((x.T + h) % S)) e = i;
          if (e < 0) begin ok = 0; break; end
          if (h == 0 && x.en_in[e] != P_L) ok = 0;
          if (x.en_cyc[e] >= x.T + h) ok = 0;
          if (h == x.h) begin
            if (x.en_out[e] != P_L || n != int'(x.r.dst)) ok = 0;
          end else begin
            automatic int nn = nstep(n, x.en_out[e]);
            if (nn < 0 || mdist(nn, int'(x.r.dst)) != x.h - h - 1) begin ok = 0; break; end
            // the next router must take this hop's data on the matching input
            for (int i = 0; i < x.en_node.size(); i++)
              if (x.en_node[i] == nn && x.en_slot[i] == int'((x.T + h + 1) % S) &&
                  x.en_in[i] != opposite(x.en_out[e])) ok = 0;
            n = nn;
          end
        end
        chk(ok, $sformatf("sideband chain of tag %0d", t));
        for (int i = 0; i < x.en_node.size(); i++)
          owner[x.en_node[i]][x.en_out[i]][x.en_slot[i]] = 0;
        parts[t]--;
        if (!last_end.exists(t) || last_end[t] < cyc) last_end[t] = cyc;
        fin_keys.push_back(k);
      end
    end
    foreach (fin_keys[i]) recs.delete(fin_keys[i]);
    // done: two cycles after the copy's last circuit finished; one circuit is
    // released per cycle, so simultaneous finishes queue up a little
    if (done_vld) begin
      automatic int t = int'(done_tag);
      chk(parts.exists(t) && parts[t] == 0 && last_end.exists(t), $sformatf("done for tag %0d with circuits live", t));
      if (last_end.exists(t)) begin
        chk(cyc >= last_end[t] + 2 && cyc <= last_end[t] + 2 + 8, $sformatf("done time of tag %0d", t));
        if (cyc > last_end[t] + 2) m_rel_wait++;
        last_end.delete(t);
      end
      n_done++;
    end
  end

  initial begin
    for (int n = 0; n < 256; n++) for (int p = 0; p < 7; p++) for (int s = 0; s < S; s++) owner[n][p][s] = 0;
    req_vld = 0; req = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 1; k <= NREQ; k++) begin
      automatic int s = $urandom % 256, d;
      if (k % 3 == 0) s = 9;
      do d = $urandom % 256; while (d == s);
      req = '{tag: 8'(k), src: 8'(s), src_addr: 21'(k*8), dst: 8'(d), dst_addr: 21'(21'h8000 + k*8),
              len: 16'(k > NREQ/2 ? 2 + $urandom % 7 : 1 + $urandom % 3)};
      req_vld = 1;
      do @(posedge clk); while (!req_ready);
      #1 req_vld = 0;
      if (k <= NREQ/2) repeat ($urandom % 3) @(posedge clk);
      #1;
    end
    while (n_done < NREQ) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("stall cycles=%0d cycles with >=2 circuits=%0d copies on two circuits=%0d split fell back to one=%0d",
             m_stall, m_conc, split_two, split_alone);
    chk(split_two > 0, "no copy used a second slot");
    chk(split_alone > 0, "no copy fell back to a single circuit");
    chk(m_stall > 0, "no stall");
    chk(m_conc > 0, "never two live circuits");
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
