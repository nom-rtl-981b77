// nom_router_tb: checks the router datapath cycle by cycle.
// A reference slot table receives the same random sideband writes as the
// router. Every cycle random flits are driven on all six input links; the
// expected value of each output port is the flit latched from the input the
// reference table selects for the active slot (or the bank's data register
// for P_L, or nothing for P_NONE). The eject buffer must capture the local
// output, and the bank write-data multiplexer must pick the eject buffer for
// copy writes and the bus otherwise.
module nom_router_tb;
  import nom_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]  cur_slot = '0;
  logic        cfg_vld;
  logic [3:0]  cfg_slot;
  port_e       cfg_in, cfg_out;
  flit_t       in_link [NNET];
  flit_t       out_link [NNET];
  logic [63:0] inj_data, bus_wdata, bank_wdata;
  flit_t       ej;
  logic        wsel_nom;

  nom_router dut (.clk, .rst_n, .cur_slot, .cfg_vld, .cfg_slot, .cfg_in, .cfg_out,
                  .in_link, .out_link, .inj_data, .ej, .wsel_nom, .bus_wdata, .bank_wdata);

  port_e ref_tbl [16][NPORT];
  flit_t prev_in [NNET];
  flit_t exp_ej;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    cfg_vld = 0; cfg_slot = 0; cfg_in = P_NONE; cfg_out = P_NONE;
    inj_data = '0; bus_wdata = '0; wsel_nom = 0;
    for (int i = 0; i < int'(NNET); i++) in_link[i] = '0;
    for (int s = 0; s < 16; s++) for (int o = 0; o < int'(NPORT); o++) ref_tbl[s][o] = P_NONE;
    exp_ej = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // program a dense random table
    for (int i = 0; i < 120; i++) begin
      cfg_vld = 1; cfg_slot = 4'($urandom); cfg_in = port_e'($urandom % 8);
      cfg_out = port_e'($urandom % 7);
      ref_tbl[cfg_slot][cfg_out] = cfg_in;
      @(posedge clk); #1;
    end
    cfg_vld = 0;
    for (int i = 0; i < int'(NNET); i++) prev_in[i] = in_link[i];
    for (int c = 0; c < 200; c++) begin
      // latches now hold prev_in
      for (int i = 0; i < int'(NNET); i++) in_link[i] = '{vld: 1'($urandom), data: {$urandom, $urandom}};
      inj_data  = {$urandom, $urandom};
      bus_wdata = {$urandom, $urandom};
      wsel_nom  = 1'($urandom);
      #1;
      for (int o = 0; o < int'(NNET); o++) begin
        automatic flit_t e;
        case (ref_tbl[cur_slot][o])
          P_NONE:  e = '0;
          P_L:     e = '{vld: 1'b1, data: inj_data};
          default: e = prev_in[ref_tbl[cur_slot][o]];
        endcase
        chk(out_link[o] == e, $sformatf("cycle %0d slot %0d out %0d", c, cur_slot, o));
      end
      chk(ej == exp_ej, "eject buffer");
      chk(bank_wdata == (wsel_nom ? exp_ej.data : bus_wdata), "bank write mux");
      case (ref_tbl[cur_slot][P_L])
        P_NONE: ;
        P_L:     exp_ej = '{vld: 1'b1, data: inj_data};
        default: if (prev_in[ref_tbl[cur_slot][P_L]].vld) exp_ej = prev_in[ref_tbl[cur_slot][P_L]];
      endcase
      for (int i = 0; i < int'(NNET); i++) prev_in[i] = in_link[i];
      @(posedge clk); #1;
      cur_slot = cur_slot + 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
