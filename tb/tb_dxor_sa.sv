// tb_dxor_sa: test of the dual-sense-amplifier XOR model.
// All four states of the two cells on the bit line (HRS/LRS each) are turned into a level
// (number of LRS cells) and the output must be their XOR; the AND amplifier must fire only
// for two LRS cells and the NOR amplifier only for none. With the read pulse off all
// outputs are 0.
module tb_dxor_sa;
  logic       en;
  logic [1:0] bl_lvl;
  logic       q, x1_and, x2_nor;
  int checks = 0, failures = 0;

  dxor_sa #(.LVL_W(2)) u_dut (.en(en), .bl_lvl(bl_lvl), .q(q), .x1_and(x1_and), .x2_nor(x2_nor));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          en = 1'(e); bl_lvl = 2'(a + b);
          #1;
          checks++;
          if (q !== (e == 1 && (a ^ b) == 1) ||
              x1_and !== (e == 1 && a == 1 && b == 1) ||
              x2_nor !== (e == 1 && a == 0 && b == 0)) begin
            failures++;
            $display("FAIL: en=%0d cells=%0d%0d q=%b and=%b nor=%b", e, a, b, q, x1_and, x2_nor);
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
