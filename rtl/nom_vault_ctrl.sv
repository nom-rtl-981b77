// nom_vault_ctrl: vault controller with the NoM copy queue.
//
// Regular requests from the front end enter the R/W Q; requests flagged by
// the CCU as part of a direct copy enter the high-priority Copy Q. Each cycle
// the controller serves one request on the vault's bank bus, taking the Copy
// Q first. A copy read loads the bank's data register, from which the router
// injects the word into its circuit in the next cycle; a copy write stores
// the router's eject buffer (bus_copy = 1 switches the bank-side multiplexer
// to it). A regular read returns the bank's data register on resp_* one cycle
// after it was served.
//
// Timing: a request pushed in cycle c is served in c+1 at the earliest. The
// CCU sends at most one copy request per vault per cycle, so the Copy Q never
// backs up and copy accesses have fixed latency.
//
// Follows the paper: separate Copy Q and R/W Q, copy requests flagged by the
// CCU and given priority. Own choices: one bank access per cycle (DRAM
// timing such as row activation is not modelled), queue depth QDEPTH, and the
// valid/ready handshake on the regular port.
module nom_vault_ctrl
  import nom_pkg::*;
#(
  parameter int unsigned BANKS  = 8,
  parameter int unsigned QDEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // regular requests from the front end
  input  vreq_t              rw_req,
  output logic               rw_ready,
  // copy requests from the CCU (always accepted)
  input  vreq_t              cp_req,
  // vault bank bus
  output logic               bus_vld,
  output logic               bus_we,
  output logic               bus_copy,
  output logic [VBANK_W-1:0] bus_bank,
  output logic [ADDR_W-1:0]  bus_addr,
  output logic [LINK_W-1:0]  bus_wdata,
  input  logic [LINK_W-1:0]  bank_rdata [BANKS],
  // regular read data
  output logic               resp_vld,
  output logic [LINK_W-1:0]  resp_data
);

  vreq_t cq_dout, rq_dout, cur;
  logic  cq_empty, rq_empty, cq_full, rq_full, cq_pop, rq_pop;
  logic [$clog2(QDEPTH):0] cq_cnt, rq_cnt;
  logic  rd_pend;
  logic [VBANK_W-1:0] rd_bank;

  nom_fifo #(.T(vreq_t), .DEPTH(QDEPTH)) u_copy_q (
    .clk, .rst_n, .push(cp_req.vld), .din(cp_req), .pop(cq_pop),
    .dout(cq_dout), .full(cq_full), .empty(cq_empty), .count(cq_cnt)
  );
  nom_fifo #(.T(vreq_t), .DEPTH(QDEPTH)) u_rw_q (
    .clk, .rst_n, .push(rw_req.vld && !rq_full), .din(rw_req), .pop(rq_pop),
    .dout(rq_dout), .full(rq_full), .empty(rq_empty), .count(rq_cnt)
  );

  assign rw_ready = !rq_full;

  always_comb begin
    cq_pop = !cq_empty;
    rq_pop = cq_empty && !rq_empty;
    cur    = cq_pop ? cq_dout : rq_pop ? rq_dout : '0;
    bus_vld   = cq_pop || rq_pop;
    bus_we    = cur.we;
    bus_copy  = cq_pop;
    bus_bank  = cur.bank;
    bus_addr  = cur.addr;
    bus_wdata = cur.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0;
      rd_bank <= '0;
    end else begin
      rd_pend <= rq_pop && !rq_dout.we;
      rd_bank <= rq_dout.bank;
    end
  end

  assign resp_vld  = rd_pend;
  assign resp_data = bank_rdata[rd_bank];

  // the CCU never sends more copy work than the queue drains
  a_copy_q_room: assert property (@(posedge clk) disable iff (!rst_n) !(cp_req.vld && cq_full));
  a_copy_flag:   assert property (@(posedge clk) disable iff (!rst_n) cp_req.vld |-> cp_req.copy);

endmodule
