// nom_router: the circuit-switched router added to each DRAM bank.
//
// Datapath of one hop, all in one cycle: an input latch (the circuit-switching
// buffer of a link) is read, the crossbar passes it to the output port chosen
// by the slot table for the active slot, the value crosses the link and is
// written into the downstream router's input latch at the clock edge. Data
// thus advance one hop per cycle, which is why a circuit uses slot m in one
// router and slot m+1 in the next. There is no buffering beyond one latch per
// link, no routing, arbitration or flow control.
//
// Local port: as crossbar input the router takes the bank's data register
// (inj_data, loaded by a copy read one cycle before the injection slot); the
// crossbar's local output is caught in the eject buffer (ej). The bank-side
// multiplexer chooses the bank's write data: the eject buffer for a copy write
// (wsel_nom = 1), the vault data bus otherwise.
//
// Interface: in_link/out_link indexed by port_e (N,S,E,W,U,D); cfg_* is the
// sideband write already decoded for this bank; cur_slot is the global TDM
// slot. Timing: output links are combinational from the latches and the slot
// table; latches and the eject buffer update on the rising edge.
//
// Follows the paper: crossbar + a latch per link + slot-table controller, and
// the MUX between the bank and the network. The valid bit carried with the
// data and the separate eject buffer are choices of this implementation.
module nom_router
  import nom_pkg::*;
#(
  parameter int unsigned SLOTS = nom_pkg::NSLOT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(SLOTS)-1:0]  cur_slot,
  // sideband slot-table write
  input  logic                      cfg_vld,
  input  logic [$clog2(SLOTS)-1:0]  cfg_slot,
  input  port_e                     cfg_in,
  input  port_e                     cfg_out,
  // network links
  input  flit_t                     in_link  [NNET],
  output flit_t                     out_link [NNET],
  // local port
  input  logic [LINK_W-1:0]         inj_data,   // bank data register
  output flit_t                     ej,         // eject buffer
  // bank-side write-data multiplexer
  input  logic                      wsel_nom,
  input  logic [LINK_W-1:0]         bus_wdata,
  output logic [LINK_W-1:0]         bank_wdata
);

  port_e sel [NPORT];
  flit_t lat [NNET];
  flit_t xbar [NPORT];

  nom_slot_table #(.SLOTS(SLOTS)) u_tbl (
    .clk, .rst_n, .cfg_vld, .cfg_slot, .cfg_in, .cfg_out, .cur_slot, .sel
  );

  // input latches (CS buffers)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NNET); i++) lat[i] <= '0;
    end else begin
      for (int i = 0; i < int'(NNET); i++) lat[i] <= in_link[i];
    end
  end

  // crossbar
  always_comb begin
    for (int o = 0; o < int'(NPORT); o++) begin
      case (sel[o])
        P_NONE:  xbar[o] = '0;
        P_L:     xbar[o] = '{vld: 1'b1, data: inj_data};
        default: xbar[o] = lat[sel[o][2:0]];
      endcase
    end
    for (int o = 0; o < int'(NNET); o++) out_link[o] = xbar[o];
  end

  // eject buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               ej <= '0;
    else if (xbar[P_L].vld)   ej <= xbar[P_L];
  end

  assign bank_wdata = wsel_nom ? ej.data : bus_wdata;

endmodule
