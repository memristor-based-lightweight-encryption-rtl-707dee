// tb_dec_6to40: exhaustive test of the RC/RK address decoder.
// Counts 0..39 with the enable high must raise exactly that word line; counts 40..63 and a
// low enable must raise none.
module tb_dec_6to40;
  logic        en;
  logic [5:0]  addr;
  logic [39:0] wl;
  int checks = 0, failures = 0;

  dec_6to40 u_dut (.en(en), .addr(addr), .wl(wl));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 64; a++) begin
        logic [39:0] exp_wl;
        en = 1'(e); addr = 6'(a);
        #1;
        exp_wl = (e && a < 40) ? (40'(1) << a) : 40'h0;
        checks++;
        if (wl !== exp_wl) begin
          failures++;
          $display("FAIL: en=%0d addr=%0d wl=%h expected %h", e, a, wl, exp_wl);
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
