// nom_alloc_pe_tb: random vectors against a reference of the PE rule:
// arriving vector = init_vec at the source, otherwise the AND of the three
// incoming vectors rotated by one slot (bit k moves to bit k+1, bit 15 to
// bit 0); each output = arriving vector OR that port's occupancy; all ones
// outside the box.
module nom_alloc_pe_tb;
  logic        in_box, is_src;
  logic [15:0] init_vec, in_x, in_y, in_z, v_x, v_y, v_z, v_l, out_x, out_y, out_z, out_l;
  int checks = 0, failures = 0;

  nom_alloc_pe dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      automatic logic [15:0] m, a;
      in_box = ($urandom % 5) != 0; is_src = ($urandom % 4) == 0;
      init_vec = 16'($urandom); in_x = 16'($urandom | $urandom); in_y = 16'($urandom | $urandom);
      in_z = 16'($urandom | $urandom);
      v_x = 16'($urandom & $urandom); v_y = 16'($urandom & $urandom);
      v_z = 16'($urandom & $urandom); v_l = 16'($urandom & $urandom);
      #1;
      m = in_x & in_y & in_z;
      for (int k = 0; k < 16; k++) a[k] = m[(k + 15) % 16];
      if (is_src) a = init_vec;
      checks++;
      if (out_x !== (in_box ? a | v_x : 16'hFFFF) || out_y !== (in_box ? a | v_y : 16'hFFFF) ||
          out_z !== (in_box ? a | v_z : 16'hFFFF) || out_l !== (in_box ? a | v_l : 16'hFFFF)) begin
        failures++;
        $display("FAIL: vector %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
