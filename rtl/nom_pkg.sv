// nom_pkg: constants and types shared by the Network-on-Memory (NoM) blocks.
//
// NoM links the banks of an HMC-like 3D-stacked DRAM with a 3D mesh of tiny
// circuit-switched routers. The defaults follow the evaluated configuration:
// an 8x8x4 mesh (256 banks, 32 vaults of 8 banks), 64-bit links and a
// 16-slot TDM window. Node numbering, port encoding and the request formats
// are choices of this implementation.
//
// Node coordinates: x (0..MESH_X-1), y (0..MESH_Y-1), z (layer, 0 = the layer
// nearest the logic die). Node index = (z*MESH_Y + y)*MESH_X + x.
// A vault is the column of the two horizontally adjacent banks of one DRAM
// slice across all layers: vault = y*(MESH_X/2) + x/2, and the bank inside the
// vault is {z, x[0]} (3 bits for the 8 banks of a vault).
package nom_pkg;

  // ---- evaluated configuration -------------------------------------------
  localparam int unsigned MESH_X   = 8;   // 8x8x4 mesh
  localparam int unsigned MESH_Y   = 8;
  localparam int unsigned MESH_Z   = 4;   // four DRAM layers
  localparam int unsigned NSLOT    = 16;  // slots in a TDM window
  localparam int unsigned SLOT_W   = 4;
  localparam int unsigned LINK_W   = 64;  // link = internal bus width
  localparam int unsigned ADDR_W   = 21;  // 16 MB bank / 8 B words
  localparam int unsigned NODE_W   = 8;   // 256 banks
  localparam int unsigned VBANK_W  = 3;   // 8 banks per vault
  localparam int unsigned LEN_W    = 16;  // copy length in 64-bit words
  localparam int unsigned TAG_W    = 8;   // copy request tag
  localparam int unsigned TIME_W   = 32;  // CCU cycle counter

  // ---- router ports (3-bit codes in the slot table) -----------------------
  // An input port is named after the neighbour it receives from; an output
  // port after the neighbour it sends to. N = +y, S = -y, E = +x, W = -x,
  // U = +z (away from the logic die), D = -z, L = local bank port.
  typedef enum logic [2:0] {
    P_N = 3'd0, P_S = 3'd1, P_E = 3'd2, P_W = 3'd3,
    P_U = 3'd4, P_D = 3'd5, P_L = 3'd6, P_NONE = 3'd7
  } port_e;

  localparam int unsigned NNET  = 6;  // network ports
  localparam int unsigned NPORT = 7;  // network ports + local

  // Value on a NoM link or in an input latch.
  typedef struct packed {
    logic              vld;
    logic [LINK_W-1:0] data;
  } flit_t;

  // One sideband slot-table write, as carried on a vault's sideband bus:
  // bank in the vault, slot, input port, output port.
  typedef struct packed {
    logic               vld;
    logic [VBANK_W-1:0] bank;
    logic [SLOT_W-1:0]  slot;
    port_e              in_p;
    port_e              out_p;
  } sb_cfg_t;

  // Direct copy request from the host: copy len 64-bit words.
  typedef struct packed {
    logic [TAG_W-1:0]  tag;
    logic [NODE_W-1:0] src;
    logic [ADDR_W-1:0] src_addr;
    logic [NODE_W-1:0] dst;
    logic [ADDR_W-1:0] dst_addr;
    logic [LEN_W-1:0]  len;
  } copy_req_t;

  // Request to a vault controller (regular or CCU-flagged copy access).
  typedef struct packed {
    logic               vld;
    logic               we;
    logic               copy;   // set by the CCU: goes to the Copy Q
    logic [VBANK_W-1:0] bank;
    logic [ADDR_W-1:0]  addr;
    logic [LINK_W-1:0]  wdata;  // regular writes only
  } vreq_t;

  function automatic port_e opposite(port_e p);
    case (p)
      P_N: return P_S;
      P_S: return P_N;
      P_E: return P_W;
      P_W: return P_E;
      P_U: return P_D;
      P_D: return P_U;
      default: return P_L;
    endcase
  endfunction

endpackage
