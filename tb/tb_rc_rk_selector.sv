// tb_rc_rk_selector: test of the round sequencer (6-bit counter + 6-to-40 decoder).
// After a start it checks, cycle by cycle, that the counter runs 0..39, that exactly word
// line WL(16+count) is driven while busy, that done rises 40 cycles after the load edge and
// holds, that a start while busy is ignored, and that a new start clears done.
module tb_rc_rk_selector;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        start, load, round_en, busy, done;
  logic [5:0]  round_cnt;
  logic [39:0] rk_wl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rc_rk_selector u_dut (.clk(clk), .rst_n(rst_n), .start(start), .load(load),
                        .round_en(round_en), .round_cnt(round_cnt), .rk_wl(rk_wl),
                        .busy(busy), .done(done));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(bit poke_start);
    @(negedge clk);
    start = 1'b1;
    #1;
    check(load === 1'b1, "load not raised by start when idle");
    @(negedge clk);
    start = 1'b0;
    for (int r = 0; r < 40; r++) begin
      // now between edge r+1 and r+2 after the load edge... sampled mid-cycle
      check(busy && round_en, $sformatf("not busy in round %0d", r + 1));
      check(round_cnt == 6'(r), $sformatf("round %0d: count %0d", r + 1, round_cnt));
      check(rk_wl === (40'(1) << r), $sformatf("round %0d: rk_wl %h", r + 1, rk_wl));
      check(!done, "done during rounds");
      if (poke_start && r == 10) begin
        start = 1'b1;
        #1;
        check(load === 1'b0, "start accepted while busy");
      end
      @(negedge clk);
      start = 1'b0;
    end
    check(!busy && done, "done not raised after 40 rounds");
    check(rk_wl === '0, "word line driven after the rounds");
    repeat (5) @(negedge clk);
    check(done && !busy, "done did not hold");
  endtask

  initial begin
    start = 1'b0;
    #12;
    check(!busy && !done && rk_wl === '0, "reset state");
    rst_n = 1'b1;
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
