// tb_sxor_sa: test of the scouting-logic XOR model.
// All four states of the two cells on the bit line: V1 must be high for at least one LRS
// cell, V2 only for two, and the output their XOR, i.e. the XOR of the cells. With the read
// pulse off all outputs are 0.
module tb_sxor_sa;
  logic       en;
  logic [1:0] bl_lvl;
  logic       q, v1_hi, v2_hi;
  int checks = 0, failures = 0;

  sxor_sa #(.LVL_W(2)) u_dut (.en(en), .bl_lvl(bl_lvl), .q(q), .v1_hi(v1_hi), .v2_hi(v2_hi));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          en = 1'(e); bl_lvl = 2'(a + b);
          #1;
          checks++;
          if (q !== (e == 1 && (a ^ b) == 1) ||
              v1_hi !== (e == 1 && (a | b) == 1) ||
              v2_hi !== (e == 1 && (a & b) == 1)) begin
            failures++;
            $display("FAIL: en=%0d cells=%0d%0d q=%b v1=%b v2=%b", e, a, b, q, v1_hi, v2_hi);
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
