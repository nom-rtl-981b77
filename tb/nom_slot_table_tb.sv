// nom_slot_table_tb: checks the TDM slot table against a reference array.
// After reset every entry must read P_NONE. Random sideband writes (some to
// P_NONE outputs, which must be ignored) are mirrored in the reference; each
// write must be visible from the next cycle, and every slot is read back
// through cur_slot.
module nom_slot_table_tb;
  import nom_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_vld;
  logic [3:0]  cfg_slot, cur_slot;
  port_e       cfg_in, cfg_out;
  port_e       sel [NPORT];
  port_e       ref_tbl [16][NPORT];
  int checks = 0, failures = 0;

  nom_slot_table dut (.clk, .rst_n, .cfg_vld, .cfg_slot, .cfg_in, .cfg_out, .cur_slot, .sel);

  task automatic check_all();
    for (int s = 0; s < 16; s++) begin
      cur_slot = 4'(s);
      #1;
      for (int o = 0; o < int'(NPORT); o++) begin
        checks++;
        if (sel[o] != ref_tbl[s][o]) begin
          failures++;
          $display("FAIL slot %0d out %0d: %0d expected %0d", s, o, sel[o], ref_tbl[s][o]);
        end
      end
    end
  endtask

  initial begin
    cfg_vld = 0; cfg_slot = 0; cfg_in = P_NONE; cfg_out = P_NONE; cur_slot = 0;
    for (int s = 0; s < 16; s++) for (int o = 0; o < int'(NPORT); o++) ref_tbl[s][o] = P_NONE;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check_all();
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      cfg_vld  = ($urandom % 4) != 0;
      cfg_slot = 4'($urandom);
      cfg_in   = port_e'($urandom % 8);
      cfg_out  = port_e'($urandom % 8);
      // not yet written: the entry must still show its old value
      cur_slot = cfg_slot;
      #1;
      if (cfg_out != P_NONE) begin
        checks++;
        if (sel[cfg_out] != ref_tbl[cfg_slot][cfg_out]) begin
          failures++;
          $display("FAIL: entry changed before the clock edge");
        end
      end
      if (cfg_vld && cfg_out != P_NONE) ref_tbl[cfg_slot][cfg_out] = cfg_in;
      @(posedge clk);
      #1 cfg_vld = 0;
      if (i % 50 == 49) check_all();
    end
    check_all();
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
