// nom_ccu: the central circuit control unit of NoM, placed in the front-end
// controller of the memory stack.
//
// Direct copy requests (source bank and word address, destination bank and
// word address, length in 64-bit words, tag) are queued and served in FIFO
// order. Serving one request:
//   cycle t    the slot allocator finds a circuit over a shortest path whose
//              first slot s can start at t+3 or later, and reserves it;
//   t+1 ...    the slot-table entries of the routers on the path are written
//              over the per-vault sideband buses, in path order, at most one
//              entry per vault per cycle (each entry is ready before the
//              data reach that router);
//   T-2        a flagged copy read goes to the source vault controller (T is
//              the injection cycle, the first cycle of slot s after t+3);
//   T ... T+h  the word crosses the h links, one per cycle;
//   T+h        a flagged copy write goes to the destination vault controller,
//              which stores the ejected word in T+h+1.
// A request of len words keeps its circuit for len windows, one word per
// window (word w is injected at T + w*SLOTS). After the last write the
// circuit's slots are released and done_vld/done_tag pulse.
// Two slots (TWO_SLOT = 1): a request of two words or more first gets a
// circuit for its first ceil(len/2) words; as soon as that circuit's
// sideband writes are out, the CCU searches again for the same pair and, if
// a second circuit (another start slot, possibly another path) is free, gives
// it the remaining words, so both halves move in parallel. If none is free
// (or the circuit table is full) the first circuit keeps all len words.
// done pulses once, when the second of the two circuits is released.
// Up to MAXC circuits are active at once; a request waits (stall) while the
// table is full, the sideband is still busy, or no free circuit exists.
//
// The CCU also owns the global TDM slot counter (cur_slot = cycle mod SLOTS).
//
// Follows the paper: FIFO service, three cycles to route a request, earliest
// start t+3, slot tables set by the CCU over dedicated sideband links with at
// most one entry per vault per cycle, read at the source and write at the
// destination timed by the deterministic circuit delay, V/B windows per
// circuit. Own choices: MAXC, queue depth, the read lead of two cycles, the
// path-ordered sideband schedule, and releasing a circuit right after its
// last write, and at most two circuits per copy, split in halves (the text
// allows several slots per copy without saying how many or how the words
// are shared out).
module nom_ccu
  import nom_pkg::*;
#(
  parameter int unsigned MX     = nom_pkg::MESH_X,
  parameter int unsigned MY     = nom_pkg::MESH_Y,
  parameter int unsigned MZ     = nom_pkg::MESH_Z,
  parameter int unsigned SLOTS  = nom_pkg::NSLOT,
  parameter int unsigned MAXC   = 8,
  parameter int unsigned RQ_DEPTH = 8,
  parameter bit          TWO_SLOT = 1'b1,   // split a copy over a second circuit when one is free
  localparam int unsigned NVAULT = (MX/2)*MY,
  localparam int unsigned MAXH   = MX+MY+MZ-3,
  localparam int unsigned SW     = $clog2(SLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // copy requests
  input  logic              req_vld,
  input  copy_req_t         req,
  output logic              req_ready,
  output logic              done_vld,
  output logic [TAG_W-1:0]  done_tag,
  // TDM slot and sideband
  output logic [SW-1:0]     cur_slot,
  output sb_cfg_t           sb     [NVAULT],
  // flagged copy requests to the vault controllers
  output vreq_t             cp_cmd [NVAULT],
  // status
  output logic              stall,       // a queued request could not be routed this cycle
  output logic [$clog2(MAXC+1)-1:0] active
);

  function automatic int cx(int n); return n % int'(MX); endfunction
  function automatic int cy(int n); return (n / int'(MX)) % int'(MY); endfunction
  function automatic int cz(int n); return n / int'(MX*MY); endfunction
  function automatic int vault_of(int n); return cy(n)*int'(MX/2) + cx(n)/2; endfunction
  function automatic logic [VBANK_W-1:0] vbank_of(int n);
    return VBANK_W'(cz(n)*2 + cx(n)%2);
  endfunction
  function automatic int step(int n, port_e d);
    case (d)
      P_E: return n + 1;
      P_W: return n - 1;
      P_N: return n + int'(MX);
      P_S: return n - int'(MX);
      P_U: return n + int'(MX*MY);
      P_D: return n - int'(MX*MY);
      default: return n;
    endcase
  endfunction

  typedef struct packed {
    logic                  vld;
    logic [TAG_W-1:0]      tag;
    logic [NODE_W-1:0]     src;
    logic [NODE_W-1:0]     dst;
    logic [ADDR_W-1:0]     saddr;
    logic [ADDR_W-1:0]     daddr;
    logic [LEN_W-1:0]      len;
    logic [LEN_W-1:0]      rd_cnt;
    logic [LEN_W-1:0]      wr_cnt;
    logic [TIME_W-1:0]     rd_t;
    logic [TIME_W-1:0]     wr_t;
    logic [4:0]            hops;
    logic [SW-1:0]         slot;
    logic [MAXH*3-1:0]     dirs;
    logic                  twin;   // the other half of the copy is still live
    logic [$clog2(MAXC)-1:0] mate;
  } circ_t;

  logic [TIME_W-1:0] now;
  circ_t             circ [MAXC];

  // ---- request queue ----------------------------------------------------------
  copy_req_t rq_head;
  logic      rq_empty, rq_full, rq_pop;
  logic      take;                        // a circuit is allocated this cycle
  logic      first_half;                  // ... for the first half of a split copy
  logic      split;                       // waiting to search for the second half
  logic      split_done;                  // second-half search resolved this cycle
  logic [$clog2(MAXC)-1:0] sp_idx;        // circuit of the first half
  logic [LEN_W-1:0]        sp_off;        // words given to the first half
  logic [LEN_W-1:0]        alloc_len, alloc_off;
  logic [$clog2(RQ_DEPTH):0] rq_cnt;

  nom_fifo #(.T(copy_req_t), .DEPTH(RQ_DEPTH)) u_req_q (
    .clk, .rst_n, .push(req_vld && !rq_full), .din(req), .pop(rq_pop),
    .dout(rq_head), .full(rq_full), .empty(rq_empty), .count(rq_cnt)
  );
  assign req_ready = !rq_full;

  // ---- slot allocator ---------------------------------------------------------
  logic          a_found, a_srch, a_rel;
  logic [SW-1:0] a_start, a_wait, r_slot;
  logic [4:0]    a_hops, r_hops;
  port_e         a_dirs [MAXH];
  port_e         r_dirs [MAXH];
  logic [NODE_W-1:0] r_src;

  nom_slot_alloc #(.MX(MX), .MY(MY), .MZ(MZ), .SLOTS(SLOTS), .LEAD(3)) u_alloc (
    .clk, .rst_n,
    .srch_vld(a_srch), .srch_src(rq_head.src), .srch_dst(rq_head.dst), .cur_slot,
    .found(a_found), .start_slot(a_start), .wait_slots(a_wait), .hops(a_hops),
    .dirs(a_dirs), .commit(take),
    .rel_vld(a_rel), .rel_src(r_src), .rel_hops(r_hops), .rel_slot(r_slot), .rel_dirs(r_dirs)
  );

  // ---- sideband programmer state ----------------------------------------------
  logic [MAXH:0]     pend;
  logic [NODE_W-1:0] p_src;
  logic [SW-1:0]     p_slot;
  logic [4:0]        p_hops;
  port_e             p_dirs [MAXH];
  logic [MAXH:0]     pend_clr;

  // ---- free circuit entry -------------------------------------------------------
  int   free_idx, rel_idx;
  logic free_any, rel_any;

  always_comb begin
    free_any = 1'b0; free_idx = 0;
    rel_any  = 1'b0; rel_idx  = 0;
    for (int c = int'(MAXC) - 1; c >= 0; c--) begin
      if (!circ[c].vld) begin free_any = 1'b1; free_idx = c; end
      if (circ[c].vld && circ[c].wr_cnt == circ[c].len) begin rel_any = 1'b1; rel_idx = c; end
    end
    a_srch     = !rq_empty && free_any && (pend == '0);
    take       = a_srch && a_found;
    first_half = take && !split && TWO_SLOT && rq_head.len > LEN_W'(1);
    split_done = split && (pend == '0);
    rq_pop     = (take && !first_half) || split_done;
    stall      = !rq_empty && !split && !take;
    // first half: ceil(len/2) words; second half: the rest
    alloc_off  = split ? sp_off : '0;
    alloc_len  = split ? rq_head.len - sp_off
               : first_half ? rq_head.len - (rq_head.len >> 1) : rq_head.len;
    a_rel  = rel_any;
    r_src  = circ[rel_idx].src;
    r_hops = circ[rel_idx].hops;
    r_slot = circ[rel_idx].slot;
    for (int h = 0; h < int'(MAXH); h++) r_dirs[h] = port_e'(circ[rel_idx].dirs[h*3 +: 3]);
  end

  assign cur_slot = now[SW-1:0];

  // ---- sideband: one entry per vault per cycle, in path order --------------------
  always_comb begin
    automatic int n = int'(p_src);
    automatic logic [NVAULT-1:0] used = '0;
    pend_clr = '0;
    for (int v = 0; v < int'(NVAULT); v++) sb[v] = '0;
    for (int h = 0; h <= int'(MAXH); h++) begin
      if (h <= int'(p_hops)) begin
        if (pend[h] && !used[vault_of(n)]) begin
          used[vault_of(n)] = 1'b1;
          pend_clr[h] = 1'b1;
          sb[vault_of(n)].vld   = 1'b1;
          sb[vault_of(n)].bank  = vbank_of(n);
          sb[vault_of(n)].slot  = SW'((int'(p_slot) + h) % int'(SLOTS));
          sb[vault_of(n)].in_p  = (h == 0) ? P_L : opposite(p_dirs[h-1]);
          sb[vault_of(n)].out_p = (h == int'(p_hops)) ? P_L : p_dirs[h];
        end
        if (h < int'(p_hops)) n = step(n, p_dirs[h]);
      end
    end
  end

  // ---- copy read / write commands --------------------------------------------------
  always_comb begin
    for (int v = 0; v < int'(NVAULT); v++) cp_cmd[v] = '0;
    for (int c = 0; c < int'(MAXC); c++) begin
      if (circ[c].vld && circ[c].rd_cnt != circ[c].len && now == circ[c].rd_t) begin
        cp_cmd[vault_of(int'(circ[c].src))] = '{vld: 1'b1, we: 1'b0, copy: 1'b1,
            bank: vbank_of(int'(circ[c].src)), addr: circ[c].saddr + ADDR_W'(circ[c].rd_cnt),
            wdata: '0};
      end
      if (circ[c].vld && circ[c].wr_cnt != circ[c].len && now == circ[c].wr_t) begin
        cp_cmd[vault_of(int'(circ[c].dst))] = '{vld: 1'b1, we: 1'b1, copy: 1'b1,
            bank: vbank_of(int'(circ[c].dst)), addr: circ[c].daddr + ADDR_W'(circ[c].wr_cnt),
            wdata: '0};
      end
    end
  end

  // ---- state ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      pend     <= '0;
      p_src    <= '0;
      p_slot   <= '0;
      p_hops   <= '0;
      for (int h = 0; h < int'(MAXH); h++) p_dirs[h] <= P_NONE;
      for (int c = 0; c < int'(MAXC); c++) circ[c] <= '0;
      done_vld <= 1'b0;
      done_tag <= '0;
      split    <= 1'b0;
      sp_idx   <= '0;
      sp_off   <= '0;
    end else begin
      now      <= now + 1'b1;
      pend     <= pend & ~pend_clr;
      done_vld <= 1'b0;
      for (int c = 0; c < int'(MAXC); c++) begin
        if (circ[c].vld && circ[c].rd_cnt != circ[c].len && now == circ[c].rd_t) begin
          circ[c].rd_cnt <= circ[c].rd_cnt + 1'b1;
          circ[c].rd_t   <= circ[c].rd_t + TIME_W'(SLOTS);
        end
        if (circ[c].vld && circ[c].wr_cnt != circ[c].len && now == circ[c].wr_t) begin
          circ[c].wr_cnt <= circ[c].wr_cnt + 1'b1;
          circ[c].wr_t   <= circ[c].wr_t + TIME_W'(SLOTS);
        end
      end
      if (rel_any) begin
        circ[rel_idx].vld <= 1'b0;
        if (circ[rel_idx].twin) begin
          // first half of the pair to finish: the copy is done with the other one
          circ[circ[rel_idx].mate].twin <= 1'b0;
        end else begin
          done_vld <= 1'b1;
          done_tag <= circ[rel_idx].tag;
        end
      end
      if (first_half) begin
        split  <= 1'b1;
        sp_idx <= $clog2(MAXC)'(free_idx);
        sp_off <= alloc_len;
      end
      if (split_done) begin
        split <= 1'b0;
        if (take) begin
          circ[sp_idx].twin   <= 1'b1;
          circ[sp_idx].mate   <= $clog2(MAXC)'(free_idx);
        end else begin
          // no second circuit: the first one carries the whole copy
          circ[sp_idx].len    <= rq_head.len;
        end
      end
      if (take) begin
        automatic logic [TIME_W-1:0] t0 = now + TIME_W'(3) + TIME_W'(a_wait);
        circ[free_idx].vld    <= 1'b1;
        circ[free_idx].tag    <= rq_head.tag;
        circ[free_idx].src    <= rq_head.src;
        circ[free_idx].dst    <= rq_head.dst;
        circ[free_idx].saddr  <= rq_head.src_addr + ADDR_W'(alloc_off);
        circ[free_idx].daddr  <= rq_head.dst_addr + ADDR_W'(alloc_off);
        circ[free_idx].len    <= alloc_len;
        circ[free_idx].twin   <= split;
        circ[free_idx].mate   <= sp_idx;
        circ[free_idx].rd_cnt <= '0;
        circ[free_idx].wr_cnt <= '0;
        circ[free_idx].rd_t   <= t0 - TIME_W'(2);
        circ[free_idx].wr_t   <= t0 + TIME_W'(a_hops);
        circ[free_idx].hops   <= a_hops;
        circ[free_idx].slot   <= a_start;
        for (int h = 0; h < int'(MAXH); h++) circ[free_idx].dirs[h*3 +: 3] <= a_dirs[h];
        pend   <= '0;
        for (int h = 0; h <= int'(MAXH); h++) if (h <= int'(a_hops)) pend[h] <= 1'b1;
        p_src  <= rq_head.src;
        p_slot <= a_start;
        p_hops <= a_hops;
        for (int h = 0; h < int'(MAXH); h++) p_dirs[h] <= a_dirs[h];
      end
    end
  end

  always_comb begin
    active = '0;
    for (int c = 0; c < int'(MAXC); c++) active = active + circ[c].vld;
  end

  // copy requests between banks only; a zero-length copy is not a copy
  a_req_ok: assert property (@(posedge clk) disable iff (!rst_n)
                             req_vld && req_ready |-> req.src != req.dst && req.len != '0);

endmodule
