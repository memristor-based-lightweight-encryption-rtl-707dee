// tb_gift_slice: test of one slice of the cipher.
// Three slices are tested side by side: one without a round-constant column (DXOR), one with
// it (DXOR), and one with it using the scouting-logic XOR. Each gets a random 16-entry table
// in WL0..WL15 and random cells in WL16..WL55. Then random rounds are applied: S-box input x
// and round n selected together for one cycle. The register must then hold
//     table[x] ^ (key_row[n] & mask),  mask = 4'b0110, or 4'b1110 with the RC column,
// i.e. the S-box output with bit lines 1 and 2 (and 3) XORed with the key cells and bit 0
// read out unchanged. It also checks the plaintext load, that a cycle without a round holds
// the register, and that a rewritten table row is used afterwards.
module tb_gift_slice;
  import gift_pkg::*;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             wr_en, rnd, ld;
  logic [ROW_W-1:0] wr_row;
  logic [3:0]       wr_data, sb_in, ld_val;
  logic [RK_ROWS-1:0] rk_wl;
  logic [3:0]       q [3];

  logic [3:0] table_m [3][16];
  logic [3:0] rk_m    [3][40];
  localparam logic [3:0] MASK [3] = '{4'b0110, 4'b1110, 4'b1110};
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [2:0] sel;   // which slice a write goes to

  gift_slice #(.HAS_RC(1'b0), .XOR_STYLE(XOR_DSA)) u_plain (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en && sel[0]), .wr_row(wr_row), .wr_data(wr_data),
    .rnd(rnd), .sb_in(sb_in), .rk_wl(rk_wl), .ld(ld), .ld_val(ld_val), .q(q[0]));
  gift_slice #(.HAS_RC(1'b1), .XOR_STYLE(XOR_DSA)) u_rc (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en && sel[1]), .wr_row(wr_row), .wr_data(wr_data),
    .rnd(rnd), .sb_in(sb_in), .rk_wl(rk_wl), .ld(ld), .ld_val(ld_val), .q(q[1]));
  gift_slice #(.HAS_RC(1'b1), .XOR_STYLE(XOR_SCOUTING)) u_scout (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en && sel[2]), .wr_row(wr_row), .wr_data(wr_data),
    .rnd(rnd), .sb_in(sb_in), .rk_wl(rk_wl), .ld(ld), .ld_val(ld_val), .q(q[2]));

  task automatic write(int s, int unsigned row, logic [3:0] d);
    @(negedge clk);
    wr_en = 1'b1; sel = 3'(1) << s; wr_row = ROW_W'(row); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    if (row < 16) table_m[s][row] = d; else rk_m[s][row-16] = d;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic round(logic [3:0] x, int n);
    @(negedge clk);
    rnd = 1'b1; sb_in = x; rk_wl = 40'(1) << n;
    @(negedge clk);
    rnd = 1'b0; rk_wl = '0;
    for (int s = 0; s < 3; s++)
      check(q[s] === (table_m[s][x] ^ (rk_m[s][n] & MASK[s])),
            $sformatf("slice %0d x=%h round %0d: q=%h expected %h", s, x, n, q[s],
                      table_m[s][x] ^ (rk_m[s][n] & MASK[s])));
  endtask

  initial begin
    wr_en = 0; rnd = 0; ld = 0; sel = 0; wr_row = 0; wr_data = 0; sb_in = 0; ld_val = 0;
    rk_wl = '0;
    #12 rst_n = 1'b1;
    for (int s = 0; s < 3; s++)
      for (int r = 0; r < 56; r++) write(s, r, 4'($urandom));
    // load
    @(negedge clk);
    ld = 1'b1; ld_val = 4'ha;
    @(negedge clk);
    ld = 1'b0;
    for (int s = 0; s < 3; s++) check(q[s] === 4'ha, "plaintext load");
    // no round, no change
    repeat (2) @(negedge clk);
    for (int s = 0; s < 3; s++) check(q[s] === 4'ha, "register did not hold");
    // every input with every round
    for (int n = 0; n < 40; n++)
      for (int x = 0; x < 16; x++) round(4'(x), n);
    // rewrite a table row and a key row, then use them
    write(0, 5, ~table_m[0][5]);
    write(1, 16 + 7, ~rk_m[1][7]);
    write(2, 16 + 7, ~rk_m[2][7]);
    round(4'h5, 7);
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
