// nom_slot_table: the local controller ("Ctrl") of a NoM router - its TDM
// slot table.
//
// For every slot of the repeating NSLOT-slot window and every output port the
// table holds the input port that drives that output in that slot (P_NONE =
// output idle). The CCU writes one entry per cycle through the sideband
// (slot, input, output); the entry takes effect from the next cycle. In each
// cycle the row of the active slot (cur_slot, broadcast by the CCU) is read
// combinationally and steers the crossbar.
//
// Follows the paper: an n-entry slot table, filled by the circuit control
// unit, giving the input-output connections per slot, with <slot, in -> out>
// entries of 4 + 3 + 3 bits. Own choices: the table is stored per output port
// (so one slot can carry several circuits through different outputs), entries
// reset to P_NONE, and a freed circuit's entries are simply overwritten by the
// next circuit that reserves the same slot and output.
module nom_slot_table
  import nom_pkg::*;
#(
  parameter int unsigned SLOTS = nom_pkg::NSLOT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // sideband write
  input  logic                      cfg_vld,
  input  logic [$clog2(SLOTS)-1:0]  cfg_slot,
  input  port_e                     cfg_in,
  input  port_e                     cfg_out,
  // active slot and the connections it selects, one input per output port
  input  logic [$clog2(SLOTS)-1:0]  cur_slot,
  output port_e                     sel [NPORT]
);

  port_e tbl [SLOTS][NPORT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SLOTS); s++)
        for (int o = 0; o < int'(NPORT); o++)
          tbl[s][o] <= P_NONE;
    end else if (cfg_vld && cfg_out != P_NONE) begin
      tbl[cfg_slot][cfg_out[2:0]] <= cfg_in;
    end
  end

  always_comb begin
    for (int o = 0; o < int'(NPORT); o++)
      sel[o] = tbl[cur_slot][o];
  end

endmodule
