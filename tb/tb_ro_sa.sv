// tb_ro_sa: test of the read-out sense amplifier model.
// Bit-line levels 0..3 with and without the read pulse: the output must be 1 exactly when
// the pulse is on and at least one LRS cell conducts.
module tb_ro_sa;
  logic       en;
  logic [1:0] bl_lvl;
  logic       q;
  int checks = 0, failures = 0;

  ro_sa #(.LVL_W(2)) u_dut (.en(en), .bl_lvl(bl_lvl), .q(q));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int l = 0; l < 4; l++) begin
        en = 1'(e); bl_lvl = 2'(l);
        #1;
        checks++;
        if (q !== (e == 1 && l >= 1)) begin
          failures++;
          $display("FAIL: en=%0d level=%0d q=%b", e, l, q);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
