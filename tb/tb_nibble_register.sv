// tb_nibble_register: test of the slice output register.
// Random cycles of load, round and idle; a model register says what the output must be
// after each edge (load has priority, idle holds). Reset must clear it.
module tb_nibble_register;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       ld, rnd;
  logic [3:0] ld_val, rnd_val, q, exp_q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nibble_register u_dut (.clk(clk), .rst_n(rst_n), .ld(ld), .ld_val(ld_val),
                         .rnd(rnd), .rnd_val(rnd_val), .q(q));

  initial begin
    ld = 0; rnd = 0; ld_val = 0; rnd_val = 0;
    #12;
    checks++;
    if (q !== 4'h0) begin failures++; $display("FAIL: reset value %h", q); end
    rst_n = 1'b1;
    exp_q = 4'h0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      ld = 1'($urandom); rnd = 1'($urandom);
      ld_val = 4'($urandom); rnd_val = 4'($urandom);
      if (ld) exp_q = ld_val; else if (rnd) exp_q = rnd_val;
      @(posedge clk);
      #1;
      checks++;
      if (q !== exp_q) begin
        failures++;
        $display("FAIL: ld=%b rnd=%b q=%h expected %h", ld, rnd, q, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
