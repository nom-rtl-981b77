// nom_alloc_pe: one processing element of the TDM slot-allocation accelerator.
//
// A busy-slot bit vector (bit k = 1: slot k cannot be used) travels from the
// source PE towards the destination PE along every shortest path at once. A
// PE takes the vectors that its up-to-three upstream neighbours send it and
// ANDs them (a slot is usable if it is usable over any of the paths), rotates
// the result by one slot, because a circuit that holds slot k in the previous
// router holds slot k+1 here, and then ORs in the occupancy vector of each of
// its own output ports (one row of the router's p x n matrix V) to produce the
// vector it passes on in that direction. The source PE starts from init_vec
// instead. A PE outside the source/destination box sends all ones.
//
// The rotation maps bit k to bit k+1 (bit NSLOT-1 wraps to bit 0); written
// with slot 0 leftmost this is the paper's "rotate right". Purely
// combinational.
//
// Follows the paper: rotate, OR with the output-port vectors, pass on; zero
// bits at the destination mark usable circuits. The AND merge of converging
// paths and the separate local-port output (used at the destination) are
// choices of this implementation.
module nom_alloc_pe #(
  parameter int unsigned SLOTS = nom_pkg::NSLOT
) (
  input  logic             in_box,   // PE lies on some shortest path
  input  logic             is_src,
  input  logic [SLOTS-1:0] init_vec, // source: slots that cannot start
  input  logic [SLOTS-1:0] in_x,     // from the upstream PE in x (all ones if none)
  input  logic [SLOTS-1:0] in_y,
  input  logic [SLOTS-1:0] in_z,
  input  logic [SLOTS-1:0] v_x,      // occupancy of this router's output towards +x hop
  input  logic [SLOTS-1:0] v_y,
  input  logic [SLOTS-1:0] v_z,
  input  logic [SLOTS-1:0] v_l,      // occupancy of the local (eject) output
  output logic [SLOTS-1:0] out_x,
  output logic [SLOTS-1:0] out_y,
  output logic [SLOTS-1:0] out_z,
  output logic [SLOTS-1:0] out_l
);

  logic [SLOTS-1:0] merged, arr;

  always_comb begin
    merged = in_x & in_y & in_z;
    arr    = is_src ? init_vec : {merged[SLOTS-2:0], merged[SLOTS-1]};
    out_x  = in_box ? (arr | v_x) : '1;
    out_y  = in_box ? (arr | v_y) : '1;
    out_z  = in_box ? (arr | v_z) : '1;
    out_l  = in_box ? (arr | v_l) : '1;
  end

endmodule
