// nom_top_tb: end-to-end test of nom_top at its default size (8x8x4 mesh,
// 256 banks, 32 vaults, 16-slot window).
//
// Phase 1: one-word copies through an idle network, shaped like the worked
// example of a circuit that goes twice south and twice down (source on the
// top layer). Checks the data and the exact completion time: a request
// offered in cycle c is picked up in c+1, injected in c+4, ejected h cycles
// later, written one cycle after that, and reported done two cycles later.
// Then a two-word copy on the same idle path: its second word gets its own
// circuit, searched once the first circuit's three sideband writes into the
// destination vault are out (c+5), so it starts at c+8 and is done at
// c+8+h+2 instead of waiting a whole window.
// Phase 2: a burst of random copies (1..8 words, any source/destination)
// together with random regular writes and reads on every vault port. Checks
// every copied word, every regular read, and counts the mechanisms the
// design has: concurrent circuits, copies split over a second slot, requests stalled in the CCU, multi-window
// circuits, vertical hops, sideband entries serialised in one vault, copy
// accesses taking the vault bus ahead of waiting regular requests, and
// regular reads answered while circuits are active. A mechanism that never
// occurs counts as a failure.
module nom_top_tb;
  import nom_pkg::*;

  localparam int unsigned MX = MESH_X, MY = MESH_Y, MZ = MESH_Z;
  localparam int unsigned NODES = MX*MY*MZ, NVAULT = (MX/2)*MY;
  localparam int          NCOPY = 60;
  localparam int          NREG  = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_vld, req_ready, done_vld, stall;
  copy_req_t req;
  logic [TAG_W-1:0] done_tag;
  logic [$clog2(8+1)-1:0] active;
  logic [SLOT_W-1:0] cur_slot;
  vreq_t             rw_req    [NVAULT];
  logic              rw_ready  [NVAULT];
  logic              resp_vld  [NVAULT];
  logic [LINK_W-1:0] resp_data [NVAULT];
  logic              bank_en    [NODES];
  logic              bank_we    [NODES];
  logic [ADDR_W-1:0] bank_addr  [NODES];
  logic [LINK_W-1:0] bank_wdata [NODES];
  logic [LINK_W-1:0] bank_rdata [NODES];

  nom_top dut (
    .clk, .rst_n, .req_vld, .req, .req_ready, .done_vld, .done_tag, .stall, .active,
    .cur_slot, .rw_req, .rw_ready, .resp_vld, .resp_data,
    .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata
  );

  nom_dram_model #(.NODES(NODES)) u_mem (
    .clk, .en(bank_en), .we(bank_we), .addr(bank_addr), .wdata(bank_wdata), .rdata(bank_rdata)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int node(int x, int y, int z);
    return (z*int'(MY) + y)*int'(MX) + x;
  endfunction
  function automatic int vault_of(int n);
    return ((n / int'(MX)) % int'(MY))*int'(MX/2) + (n % int'(MX))/2;
  endfunction
  function automatic int vbank_of(int n);
    return (n / int'(MX*MY))*2 + (n % int'(MX)) % 2;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- copy bookkeeping ----------------------------------------------------
  copy_req_t reqs [NCOPY+1];
  bit        done_seen [NCOPY+1];
  int        n_done = 0;

  always @(posedge clk) if (rst_n && done_vld) begin
    done_seen[done_tag] = 1'b1;
    n_done++;
  end

  // ---- mechanism counters ----------------------------------------------------
  int m_concurrent = 0, m_stall = 0, m_multiwin = 0, m_vertical = 0;
  int m_sb_serial = 0, m_copy_prio = 0, m_reg_during_copy = 0, m_two_slot = 0;
  logic [22:0] pend_q;

  always @(posedge clk) if (rst_n) begin
    if (active >= 2) m_concurrent++;
    if (dut.u_ccu.take && dut.u_ccu.alloc_len > 1) m_multiwin++;
    if (stall) m_stall++;
    if (dut.u_ccu.pend != '0 && pend_q != '0) m_sb_serial++;
    if (dut.u_ccu.split_done && dut.u_ccu.take) m_two_slot++;
    pend_q <= 23'(dut.u_ccu.pend);
    for (int v = 0; v < int'(NVAULT); v++)
      if (resp_vld[v] && active != 0) m_reg_during_copy++;
  end
  for (genvar v = 0; v < int'(NVAULT); v++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.g_vault[v].u_vc.bus_copy && !dut.g_vault[v].u_vc.rq_empty)
      m_copy_prio++;
  end

  // ---- regular traffic ---------------------------------------------------------
  logic [LINK_W-1:0] exp_q [NVAULT][$];
  int reg_sent = 0, reg_reads = 0;
  bit reg_on = 1'b0;

  for (genvar v = 0; v < int'(NVAULT); v++) begin : g_resp
    always @(posedge clk) if (rst_n && resp_vld[v]) begin
      if (exp_q[v].size() == 0) check(1'b0, $sformatf("vault %0d: unexpected read data", v));
      else begin
        automatic logic [LINK_W-1:0] e = exp_q[v].pop_front();
        check(resp_data[v] == e, $sformatf("vault %0d: read %h expected %h", v, resp_data[v], e));
      end
    end
  end

  // written regular words, per vault/bank/address, for read-back
  logic [LINK_W-1:0] reg_mem [longint];

  task automatic drive_regular();
    for (int v = 0; v < int'(NVAULT); v++) rw_req[v] = '0;
    if (!reg_on || reg_sent >= NREG) return;
    for (int v = 0; v < int'(NVAULT); v++) begin
      if (rw_ready[v] && ($urandom % 4) == 0 && reg_sent < NREG) begin
        automatic int b = $urandom % 8;
        automatic int n = node((v % int'(MX/2))*2 + b%2, v / int'(MX/2), b/2);
        automatic logic [ADDR_W-1:0] a = ADDR_W'(21'h1C0000 + ($urandom % 8));
        automatic longint k = (longint'(n) << ADDR_W) | longint'(a);
        rw_req[v].vld  = 1'b1;
        rw_req[v].copy = 1'b0;
        rw_req[v].bank = VBANK_W'(b);
        rw_req[v].addr = a;
        if ($urandom % 2) begin
          rw_req[v].we    = 1'b1;
          rw_req[v].wdata = {$urandom, $urandom};
          reg_mem[k]      = rw_req[v].wdata;
        end else begin
          rw_req[v].we = 1'b0;
          exp_q[v].push_back(reg_mem.exists(k) ? reg_mem[k] : u_mem.pattern(n, a));
          reg_reads++;
        end
        reg_sent++;
      end
    end
  endtask

  always @(negedge clk) drive_regular();

  // ---- copy issue ------------------------------------------------------------------
  task automatic send_copy(copy_req_t r);
    req     = r;
    req_vld = 1'b1;
    do @(posedge clk); while (!req_ready);
    #1 req_vld = 1'b0;
  endtask

  task automatic verify_copy(copy_req_t r);
    for (int w = 0; w < int'(r.len); w++) begin
      automatic logic [LINK_W-1:0] got = u_mem.peek(int'(r.dst), r.dst_addr + ADDR_W'(w));
      automatic logic [LINK_W-1:0] exp = u_mem.pattern(int'(r.src), r.src_addr + ADDR_W'(w));
      check(got == exp, $sformatf("copy %0d word %0d: bank %0d got %h expected %h",
                                  r.tag, w, r.dst, got, exp));
    end
  endtask

  initial begin
    longint t_req, t_done;
    int hops;
    req_vld = 1'b0;
    req     = '0;
    for (int v = 0; v < int'(NVAULT); v++) rw_req[v] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- phase 1: single copy on an idle network, 2 words -------------------
    hops = 4;
    for (int p = 0; p < 2; p++) begin
      reqs[0] = '{tag: 8'd0, src: NODE_W'(node(2, 5, 3)), src_addr: 21'h00100 + 21'(p*64),
                  dst: NODE_W'(node(2, 3, 1)), dst_addr: 21'h10100 + 21'(p*64), len: 16'(p + 1)};
      #1;
      req = reqs[0]; req_vld = 1'b1;
      t_req = cyc;
      @(posedge clk); #1 req_vld = 1'b0;
      while (!done_vld) @(posedge clk);
      t_done = cyc;
      check(done_tag == 8'd0, "phase 1 tag");
      check(t_done - t_req == longint'(p == 0 ? 6 + hops : 8 + hops + 2),
            $sformatf("phase 1 latency %0d (len %0d)", t_done - t_req, p + 1));
      @(posedge clk);
      verify_copy(reqs[0]);
      repeat (20) @(posedge clk);
    end
    m_vertical++;

    // ---- phase 2: random copies with regular traffic -----------------------------
    reg_on = 1'b1;
    for (int k = 1; k <= NCOPY; k++) begin
      automatic int s, d;
      s = $urandom % NODES;
      do d = $urandom % NODES; while (d == s);
      // a few copies share a source bank to crowd its vault
      if (k % 7 == 0) s = node(0, 0, 0);
      if (s == d) d = node(7, 7, 3);
      reqs[k] = '{tag: TAG_W'(k), src: NODE_W'(s), src_addr: ADDR_W'(k*16),
                  dst: NODE_W'(d), dst_addr: ADDR_W'(21'h10000 + k*16),
                  len: LEN_W'(1 + $urandom % 8)};
      if ((s / int'(MX*MY)) != (d / int'(MX*MY))) m_vertical++;
      send_copy(reqs[k]);
    end
    while (n_done < NCOPY + 1) @(posedge clk);
    while (reg_sent < NREG) @(posedge clk);
    repeat (30) @(posedge clk);
    for (int k = 1; k <= NCOPY; k++) begin
      check(done_seen[k], $sformatf("copy %0d never completed", k));
      verify_copy(reqs[k]);
    end
    for (int v = 0; v < int'(NVAULT); v++)
      check(exp_q[v].size() == 0, $sformatf("vault %0d: %0d reads unanswered", v, exp_q[v].size()));

    $display("cycles simulated: %0d", cyc);
    $display("mechanisms: concurrent=%0d stall=%0d multiwindow=%0d vertical=%0d sideband_serial=%0d copy_priority=%0d regular_during_copy=%0d two_slot=%0d regular_reads=%0d",
             m_concurrent, m_stall, m_multiwin, m_vertical, m_sb_serial, m_copy_prio,
             m_reg_during_copy, m_two_slot, reg_reads);
    check(m_concurrent > 0, "no concurrent circuits");
    check(m_stall > 0, "no stalled request");
    check(m_multiwin > 0, "no multi-window circuit");
    check(m_vertical > 0, "no vertical path");
    check(m_sb_serial > 0, "sideband never serialised");
    check(m_copy_prio > 0, "copy queue never took priority");
    check(m_reg_during_copy > 0, "no regular access during a copy");
    check(m_two_slot > 0, "no copy used a second slot");
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
