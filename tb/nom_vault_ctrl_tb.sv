// nom_vault_ctrl_tb: random regular traffic plus CCU copy requests (at most
// one per cycle, as the CCU guarantees) into a vault controller with a small
// bank model. Checks: a copy request is on the bank bus exactly one cycle
// after it was pushed (fixed copy latency, Copy Q first); regular requests
// leave in arrival order with their fields intact; regular reads return the
// bank model's data one cycle after service. Counts how often a copy went
// ahead of a waiting regular request and fails if that never happened.
module nom_vault_ctrl_tb;
  import nom_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  vreq_t rw_req, cp_req;
  logic  rw_ready, bus_vld, bus_we, bus_copy, resp_vld;
  logic [2:0]  bus_bank;
  logic [20:0] bus_addr;
  logic [63:0] bus_wdata, resp_data;
  logic [63:0] bank_rdata [8];
  logic [63:0] mem [8][256];

  nom_vault_ctrl dut (.*);

  int checks = 0, failures = 0, prio = 0;
  vreq_t rq [$];
  vreq_t cp_last;
  logic [63:0] rd_exp [$];

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  // bank model: one access per cycle, data register holds the last read
  always @(posedge clk) begin
    if (bus_vld) begin
      if (bus_we) mem[bus_bank][bus_addr[7:0]] <= bus_wdata;
      else        bank_rdata[bus_bank] <= mem[bus_bank][bus_addr[7:0]];
    end
  end

  // checker, sampled just before the edge
  always @(negedge clk) if (rst_n) begin
    if (cp_last.vld) begin
      chk(bus_vld && bus_copy && bus_bank == cp_last.bank && bus_addr == cp_last.addr &&
          bus_we == cp_last.we, "copy request not served one cycle after push");
      if (rq.size() > 0) prio++;
    end else if (bus_vld) begin
      chk(!bus_copy && rq.size() > 0, "unexpected bus access");
      if (rq.size() > 0) begin
        automatic vreq_t e = rq.pop_front();
        chk(bus_we == e.we && bus_bank == e.bank && bus_addr == e.addr &&
            (!e.we || bus_wdata == e.wdata), "regular request order/fields");
        if (!e.we) rd_exp.push_back(mem[e.bank][e.addr[7:0]]);
      end
    end else begin
      chk(rq.size() == 0, "bus idle while regular requests wait");
    end
    if (resp_vld) begin
      chk(rd_exp.size() > 0 && resp_data == rd_exp[0], "regular read data");
      if (rd_exp.size() > 0) void'(rd_exp.pop_front());
    end
  end

  initial begin
    for (int b = 0; b < 8; b++) begin
      bank_rdata[b] = '0;
      for (int a = 0; a < 256; a++) mem[b][a] = {32'(b), 32'(a)} ^ 64'hDEAD_BEEF_0000_0000;
    end
    rw_req = '0; cp_req = '0; cp_last = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk);
      // bookkeeping of what was accepted at this edge
      if (rw_req.vld && rw_ready) rq.push_back(rw_req);
      cp_last = cp_req;
      #1;
      rw_req = '0;
      if (($urandom % 3) != 0)
        rw_req = '{vld: 1'b1, we: 1'($urandom), copy: 1'b0, bank: 3'($urandom),
                   addr: 21'($urandom % 256), wdata: {$urandom, $urandom}};
      cp_req = '0;
      if (($urandom % 4) == 0)
        cp_req = '{vld: 1'b1, we: 1'($urandom), copy: 1'b1, bank: 3'($urandom),
                   addr: 21'($urandom % 256), wdata: '0};
    end
    $display("copy ahead of waiting regular requests: %0d", prio);
    chk(prio > 0, "copy priority never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
