// nom_slot_alloc: the CCU's TDM slot-allocation accelerator.
//
// It keeps the occupancy of every router of the MX x MY x MZ mesh: for each
// node a p x n matrix V (p = 7 output ports, n = SLOTS), V[node][port][k] = 1
// when slot k of that output is reserved. A search (srch_vld, source, dest,
// the active slot cur_slot) is answered in the same cycle: a grid of
// nom_alloc_pe elements propagates busy-slot vectors over all shortest paths
// from source to destination; zero bits of the vector at the destination's
// local output are circuits that are free end to end. Among them the start
// slot that can begin earliest at or after cur_slot + LEAD is chosen (LEAD =
// 3: one cycle to find the path, one to program the slot tables, one to
// read the source word). The path is then traced back from the destination
// and given as one output port per hop (dirs[0] is used by the source router
// in slot start_slot, dirs[h] by the h-th router in slot start_slot + h; the
// destination router ejects to its bank in slot start_slot + hops).
// commit reserves the reported path at the clock edge; rel_* frees a path.
//
// PE (i,j,l) of the grid stands for the node at offset (i,j,l) from the
// source, stepping towards the destination in each dimension. This fixes the
// direction of propagation so the array has no combinational loop; the paper
// ties each PE to one network node.
//
// Vault-bus slots: besides the links, a copy needs the source vault's bank
// bus one slot before injection (read) and the destination vault's bus one
// slot after ejection (write). VB[vault][k] reserves these slots so that a
// vault controller never receives two copy commands in one cycle and copy
// latencies stay deterministic. This reservation is a choice of this
// implementation; the paper only says the vault controllers are busy at the
// read and write steps.
//
// When several upstream PEs could have delivered the data, the traceback
// takes z first, then y, then x, so a circuit travels x, then y, then z when
// it is free (as in the worked example of the text: two hops south, then two
// down). A search returns one circuit with one slot per window; a copy that
// uses two slots is built by the CCU from two searches.
module nom_slot_alloc
  import nom_pkg::*;
#(
  parameter int unsigned MX    = nom_pkg::MESH_X,
  parameter int unsigned MY    = nom_pkg::MESH_Y,
  parameter int unsigned MZ    = nom_pkg::MESH_Z,
  parameter int unsigned SLOTS = nom_pkg::NSLOT,
  parameter int unsigned LEAD  = 3,
  localparam int unsigned NODES  = MX*MY*MZ,
  localparam int unsigned NVAULT = (MX/2)*MY,
  localparam int unsigned MAXH   = MX+MY+MZ-3,
  localparam int unsigned SW     = $clog2(SLOTS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // search
  input  logic                 srch_vld,
  input  logic [NODE_W-1:0]    srch_src,
  input  logic [NODE_W-1:0]    srch_dst,
  input  logic [SW-1:0]        cur_slot,
  output logic                 found,
  output logic [SW-1:0]        start_slot,
  output logic [SW-1:0]        wait_slots,  // start - (cur_slot + LEAD), mod SLOTS
  output logic [4:0]           hops,
  output port_e                dirs [MAXH],
  input  logic                 commit,
  // release
  input  logic                 rel_vld,
  input  logic [NODE_W-1:0]    rel_src,
  input  logic [4:0]           rel_hops,
  input  logic [SW-1:0]        rel_slot,
  input  port_e                rel_dirs [MAXH]
);

  // ---- geometry helpers ---------------------------------------------------
  function automatic int cx(int n); return n % int'(MX); endfunction
  function automatic int cy(int n); return (n / int'(MX)) % int'(MY); endfunction
  function automatic int cz(int n); return n / int'(MX*MY); endfunction
  function automatic int vault_of(int n); return cy(n)*int'(MX/2) + cx(n)/2; endfunction
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
  function automatic int pidx(int i, int j, int l);
    return (l*int'(MY) + j)*int'(MX) + i;
  endfunction

  // ---- occupancy state ----------------------------------------------------
  logic [SLOTS-1:0] V  [NODES][NPORT];
  logic [SLOTS-1:0] VB [NVAULT];

  // ---- search geometry ----------------------------------------------------
  int    sxc, syc, szc, dxc, dyc, dzc;  // source coordinates, distances
  logic  sgx, sgy, sgz;                 // 1: destination lies in + direction
  port_e px, py, pz;                    // output port for a step in x, y, z
  int    src_v, dst_v;

  always_comb begin
    sxc = cx(int'(srch_src)); syc = cy(int'(srch_src)); szc = cz(int'(srch_src));
    sgx = cx(int'(srch_dst)) >= sxc;
    sgy = cy(int'(srch_dst)) >= syc;
    sgz = cz(int'(srch_dst)) >= szc;
    dxc = sgx ? cx(int'(srch_dst)) - sxc : sxc - cx(int'(srch_dst));
    dyc = sgy ? cy(int'(srch_dst)) - syc : syc - cy(int'(srch_dst));
    dzc = sgz ? cz(int'(srch_dst)) - szc : szc - cz(int'(srch_dst));
    px  = sgx ? P_E : P_W;
    py  = sgy ? P_N : P_S;
    pz  = sgz ? P_U : P_D;
    src_v = vault_of(int'(srch_src));
    dst_v = vault_of(int'(srch_dst));
  end

  // ---- PE grid --------------------------------------------------------------
  logic [SLOTS-1:0] pe_x [NODES];
  logic [SLOTS-1:0] pe_y [NODES];
  logic [SLOTS-1:0] pe_z [NODES];
  logic [SLOTS-1:0] pe_l [NODES];
  logic [SLOTS-1:0] init_vec;

  always_comb begin
    // the source cannot inject in slot k if its vault bus is taken in k-1
    for (int k = 0; k < int'(SLOTS); k++)
      init_vec[k] = VB[src_v][(k + int'(SLOTS) - 1) % int'(SLOTS)];
  end

  for (genvar l = 0; l < int'(MZ); l++) begin : g_z
    for (genvar j = 0; j < int'(MY); j++) begin : g_y
      for (genvar i = 0; i < int'(MX); i++) begin : g_x
        localparam int P = (l*int'(MY) + j)*int'(MX) + i;
        logic             inb;
        int               rn;
        logic [SLOTS-1:0] vx, vy, vz, vl, ix, iy, iz;
        always_comb begin
          inb = (i <= dxc) && (j <= dyc) && (l <= dzc);
          rn  = ((sgz ? szc + l : szc - l) * int'(MY) + (sgy ? syc + j : syc - j)) * int'(MX)
                + (sgx ? sxc + i : sxc - i);
          if (!inb || rn < 0 || rn >= int'(NODES)) rn = 0;
          vx = V[rn][px];
          vy = V[rn][py];
          vz = V[rn][pz];
          vl = V[rn][P_L];
        end
        if (i > 0) begin : g_ix assign ix = pe_x[P-1]; end
        else       begin : g_nx assign ix = '1; end
        if (j > 0) begin : g_iy assign iy = pe_y[P-int'(MX)]; end
        else       begin : g_ny assign iy = '1; end
        if (l > 0) begin : g_iz assign iz = pe_z[P-int'(MX*MY)]; end
        else       begin : g_nz assign iz = '1; end
        nom_alloc_pe #(.SLOTS(SLOTS)) u_pe (
          .in_box(inb), .is_src(P == 0), .init_vec(init_vec),
          .in_x(ix), .in_y(iy), .in_z(iz),
          .v_x(vx), .v_y(vy), .v_z(vz), .v_l(vl),
          .out_x(pe_x[P]), .out_y(pe_y[P]), .out_z(pe_z[P]), .out_l(pe_l[P])
        );
      end
    end
  end

  // ---- slot choice and traceback -------------------------------------------
  logic [SLOTS-1:0] fin;      // busy vector at the destination, by eject slot
  logic [SLOTS-1:0] free_s;   // usable start slots
  int               dhops, base, ci, cj, cl, kk;
  logic             hit;

  always_comb begin
    dhops = dxc + dyc + dzc;
    for (int k = 0; k < int'(SLOTS); k++)
      fin[k] = pe_l[pidx(dxc, dyc, dzc)][k] | VB[dst_v][(k + 1) % int'(SLOTS)];
    for (int s = 0; s < int'(SLOTS); s++)
      free_s[s] = !fin[(s + dhops) % int'(SLOTS)];
    // source and destination in one vault: read and write may not share a slot
    if (src_v == dst_v && ((dhops + 2) % int'(SLOTS)) == 0) free_s = '0;
    if (srch_src == srch_dst) free_s = '0;

    base = (int'(cur_slot) + int'(LEAD)) % int'(SLOTS);
    hit = 1'b0;
    start_slot = '0;
    wait_slots = '0;
    for (int w = 0; w < int'(SLOTS); w++) begin
      if (!hit && free_s[(base + w) % int'(SLOTS)]) begin
        hit        = 1'b1;
        start_slot = SW'((base + w) % int'(SLOTS));
        wait_slots = SW'(w);
      end
    end
    found = srch_vld && hit;
    hops  = 5'(dhops);

    // trace back from the destination
    for (int h = 0; h < int'(MAXH); h++) dirs[h] = P_NONE;
    ci = dxc; cj = dyc; cl = dzc; kk = 0;
    for (int h = int'(MAXH); h >= 1; h--) begin
      if (h <= dhops) begin
        kk = (int'(start_slot) + h - 1) % int'(SLOTS);  // slot in the upstream router
        if (cl > 0 && !pe_z[pidx(ci, cj, cl-1)][kk]) begin
          dirs[h-1] = pz; cl = cl - 1;
        end else if (cj > 0 && !pe_y[pidx(ci, cj-1, cl)][kk]) begin
          dirs[h-1] = py; cj = cj - 1;
        end else begin
          dirs[h-1] = px; ci = ci - 1;
        end
      end
    end
  end

  // ---- reserve / release -----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < int'(NODES); n++)
        for (int p = 0; p < int'(NPORT); p++) V[n][p] <= '0;
      for (int v = 0; v < int'(NVAULT); v++) VB[v] <= '0;
    end else begin
      if (rel_vld) begin
        automatic int n = int'(rel_src);
        VB[vault_of(n)][(int'(rel_slot) + int'(SLOTS) - 1) % int'(SLOTS)] <= 1'b0;
        for (int h = 0; h <= int'(MAXH); h++) begin
          if (h < int'(rel_hops)) begin
            V[n][rel_dirs[h]][(int'(rel_slot) + h) % int'(SLOTS)] <= 1'b0;
            n = step(n, rel_dirs[h]);
          end else if (h == int'(rel_hops)) begin
            V[n][P_L][(int'(rel_slot) + h) % int'(SLOTS)] <= 1'b0;
            VB[vault_of(n)][(int'(rel_slot) + h + 1) % int'(SLOTS)] <= 1'b0;
          end
        end
      end
      if (commit && found) begin
        automatic int n = int'(srch_src);
        VB[src_v][(int'(start_slot) + int'(SLOTS) - 1) % int'(SLOTS)] <= 1'b1;
        for (int h = 0; h <= int'(MAXH); h++) begin
          if (h < dhops) begin
            V[n][dirs[h]][(int'(start_slot) + h) % int'(SLOTS)] <= 1'b1;
            n = step(n, dirs[h]);
          end else if (h == dhops) begin
            V[n][P_L][(int'(start_slot) + h) % int'(SLOTS)] <= 1'b1;
            VB[dst_v][(int'(start_slot) + h + 1) % int'(SLOTS)] <= 1'b1;
          end
        end
      end
    end
  end

endmodule
