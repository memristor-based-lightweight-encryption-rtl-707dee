// tb_gift_permbits: test of the GIFT-128 permutation wiring.
// Each single-bit input of the forward permutation must appear at the position given by the
// GIFT-128 specification's table (computed here from its formula), the inverse instance
// must undo it for random states, and a few entries of the specification's printed table
// are checked directly: P(0)=0, P(1)=33, P(2)=66, P(3)=99, P(4)=96, P(5)=1, P(8)=64, P(12)=32, P(15)=3.
module tb_gift_permbits;
  logic [127:0] d, q, qi, back;
  int checks = 0, failures = 0;

  gift_permbits #(.INVERSE(1'b0)) u_fwd (.d(d), .q(q));
  gift_permbits #(.INVERSE(1'b1)) u_inv (.d(q), .q(back));
  gift_permbits #(.INVERSE(1'b1)) u_inv2 (.d(d), .q(qi));

  function automatic int unsigned spec_p(int unsigned i);
    return 4*(i/16) + 32*((3*((i%16)/4) + (i%4)) % 4) + (i%4);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int unsigned tbl_i [9] = '{0, 1, 2, 3, 4, 5, 8, 12, 15};
    int unsigned tbl_p [9] = '{0, 33, 66, 99, 96, 1, 64, 32, 3};
    for (int unsigned i = 0; i < 128; i++) begin
      d = 128'(1) << i;
      #1;
      check(q === (128'(1) << spec_p(i)), $sformatf("bit %0d -> %h", i, q));
    end
    for (int k = 0; k < 9; k++) begin
      d = 128'(1) << tbl_i[k];
      #1;
      check(q[tbl_p[k]] === 1'b1, $sformatf("P(%0d) should be %0d", tbl_i[k], tbl_p[k]));
    end
    for (int t = 0; t < 50; t++) begin
      d = {$urandom, $urandom, $urandom, $urandom};
      #1;
      check(back === d, "inverse(forward(d)) != d");
      for (int unsigned i = 0; i < 128; i++)
        if (qi[i] !== d[spec_p(i)]) begin
          check(1'b0, $sformatf("inverse bit %0d", i));
          break;
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
