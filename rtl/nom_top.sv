// nom_top: Network-on-Memory in an HMC-like 3D-stacked DRAM.
//
// An MX x MY x MZ 3D mesh of circuit-switched routers (nom_router), one per
// DRAM bank, links every bank to its neighbours in x, y and z. The central
// circuit control unit (nom_ccu) takes direct copy requests, reserves TDM
// circuits, programs the routers' slot tables over one sideband bus per
// vault, and sends flagged copy reads and writes to the vault controllers
// (nom_vault_ctrl), which also serve the host's regular requests. Copy data
// never leave the stack: a word is read into the source bank's data register,
// crosses the mesh one hop per cycle and is written from the destination
// router's eject buffer.
//
// Geometry (defaults: 8x8x4 = 256 banks, 32 vaults of 8 banks, 16-slot
// window, 64-bit links): node index = (z*MY + y)*MX + x; vault =
// y*(MX/2) + x/2 (the two banks of one slice, all layers); bank in vault =
// 2*z + x[0].
//
// The DRAM arrays themselves are outside this module: each bank has a port
// bank_en/we/addr/wdata and returns bank_rdata, the bank's data register,
// which must hold the word of the last read (one-cycle access). The front-end
// crossbar is also outside: regular requests arrive per vault on rw_req.
//
// Follows the paper: full 3D mesh (not the NoM-Light TSV-bus variant), TDM
// circuit switching, CCU in the front end, Copy Q / R/W Q vault controllers.
// Own choices are listed in the sub-modules.
module nom_top
  import nom_pkg::*;
#(
  parameter int unsigned MX    = nom_pkg::MESH_X,
  parameter int unsigned MY    = nom_pkg::MESH_Y,
  parameter int unsigned MZ    = nom_pkg::MESH_Z,
  parameter int unsigned SLOTS = nom_pkg::NSLOT,
  parameter int unsigned MAXC  = 8,
  localparam int unsigned NODES  = MX*MY*MZ,
  localparam int unsigned NVAULT = (MX/2)*MY,
  localparam int unsigned VBANKS = 2*MZ,
  localparam int unsigned SW     = $clog2(SLOTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // direct copy requests
  input  logic               req_vld,
  input  copy_req_t          req,
  output logic               req_ready,
  output logic               done_vld,
  output logic [TAG_W-1:0]   done_tag,
  output logic               stall,
  output logic [$clog2(MAXC+1)-1:0] active,
  output logic [SW-1:0]      cur_slot,
  // regular requests, one port per vault
  input  vreq_t              rw_req    [NVAULT],
  output logic               rw_ready  [NVAULT],
  output logic               resp_vld  [NVAULT],
  output logic [LINK_W-1:0]  resp_data [NVAULT],
  // DRAM bank arrays
  output logic               bank_en    [NODES],
  output logic               bank_we    [NODES],
  output logic [ADDR_W-1:0]  bank_addr  [NODES],
  output logic [LINK_W-1:0]  bank_wdata [NODES],
  input  logic [LINK_W-1:0]  bank_rdata [NODES]
);

  sb_cfg_t sb     [NVAULT];
  vreq_t   cp_cmd [NVAULT];

  logic               bus_vld   [NVAULT];
  logic               bus_we    [NVAULT];
  logic               bus_copy  [NVAULT];
  logic [VBANK_W-1:0] bus_bank  [NVAULT];
  logic [ADDR_W-1:0]  bus_addr  [NVAULT];
  logic [LINK_W-1:0]  bus_wdata [NVAULT];

  flit_t out_link [NODES][NNET];
  flit_t in_link  [NODES][NNET];
  flit_t ej       [NODES];

  nom_ccu #(.MX(MX), .MY(MY), .MZ(MZ), .SLOTS(SLOTS), .MAXC(MAXC)) u_ccu (
    .clk, .rst_n, .req_vld, .req, .req_ready, .done_vld, .done_tag,
    .cur_slot, .sb, .cp_cmd, .stall, .active
  );

  // ---- vault controllers ---------------------------------------------------
  for (genvar v = 0; v < int'(NVAULT); v++) begin : g_vault
    localparam int VX = (v % int'(MX/2)) * 2;
    localparam int VY = v / int'(MX/2);
    logic [LINK_W-1:0] rdata [VBANKS];
    for (genvar b = 0; b < int'(VBANKS); b++) begin : g_rd
      assign rdata[b] = bank_rdata[((b/2)*int'(MY) + VY)*int'(MX) + VX + b%2];
    end
    nom_vault_ctrl #(.BANKS(VBANKS)) u_vc (
      .clk, .rst_n,
      .rw_req(rw_req[v]), .rw_ready(rw_ready[v]), .cp_req(cp_cmd[v]),
      .bus_vld(bus_vld[v]), .bus_we(bus_we[v]), .bus_copy(bus_copy[v]),
      .bus_bank(bus_bank[v]), .bus_addr(bus_addr[v]), .bus_wdata(bus_wdata[v]),
      .bank_rdata(rdata), .resp_vld(resp_vld[v]), .resp_data(resp_data[v])
    );
  end

  // ---- routers and mesh links ------------------------------------------------
  for (genvar n = 0; n < int'(NODES); n++) begin : g_node
    localparam int X  = n % int'(MX);
    localparam int Y  = (n / int'(MX)) % int'(MY);
    localparam int Z  = n / int'(MX*MY);
    localparam int V  = Y*int'(MX/2) + X/2;
    localparam int VB = 2*Z + X%2;

    // input port p receives what the neighbour on side p sends towards us
    if (Y < int'(MY)-1) begin : g_n assign in_link[n][P_N] = out_link[n+int'(MX)][P_S]; end
    else                begin : g_nn assign in_link[n][P_N] = '0; end
    if (Y > 0)          begin : g_s assign in_link[n][P_S] = out_link[n-int'(MX)][P_N]; end
    else                begin : g_ns assign in_link[n][P_S] = '0; end
    if (X < int'(MX)-1) begin : g_e assign in_link[n][P_E] = out_link[n+1][P_W]; end
    else                begin : g_ne assign in_link[n][P_E] = '0; end
    if (X > 0)          begin : g_w assign in_link[n][P_W] = out_link[n-1][P_E]; end
    else                begin : g_nw assign in_link[n][P_W] = '0; end
    if (Z < int'(MZ)-1) begin : g_u assign in_link[n][P_U] = out_link[n+int'(MX*MY)][P_D]; end
    else                begin : g_nu assign in_link[n][P_U] = '0; end
    if (Z > 0)          begin : g_d assign in_link[n][P_D] = out_link[n-int'(MX*MY)][P_U]; end
    else                begin : g_nd assign in_link[n][P_D] = '0; end

    logic sel_me;
    assign sel_me = bus_bank[V] == VBANK_W'(VB);

    nom_router #(.SLOTS(SLOTS)) u_rt (
      .clk, .rst_n, .cur_slot,
      .cfg_vld(sb[V].vld && sb[V].bank == VBANK_W'(VB)),
      .cfg_slot(sb[V].slot[SW-1:0]), .cfg_in(sb[V].in_p), .cfg_out(sb[V].out_p),
      .in_link(in_link[n]), .out_link(out_link[n]),
      .inj_data(bank_rdata[n]), .ej(ej[n]),
      .wsel_nom(bus_copy[V] && bus_we[V]), .bus_wdata(bus_wdata[V]),
      .bank_wdata(bank_wdata[n])
    );

    assign bank_en[n]   = bus_vld[V] && sel_me;
    assign bank_we[n]   = bus_we[V];
    assign bank_addr[n] = bus_addr[V];
  end

endmodule
