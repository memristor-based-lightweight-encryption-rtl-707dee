// tb_dec_4to16: exhaustive test of the SB address decoder.
// For every address with the enable high exactly word line addr must be high; with the
// enable low no word line may be high.
module tb_dec_4to16;
  logic        en;
  logic [3:0]  addr;
  logic [15:0] wl;
  int checks = 0, failures = 0;

  dec_4to16 u_dut (.en(en), .addr(addr), .wl(wl));

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 16; a++) begin
        logic [15:0] exp_wl;
        en = 1'(e); addr = 4'(a);
        #1;
        exp_wl = e ? (16'(1) << a) : 16'h0;
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
