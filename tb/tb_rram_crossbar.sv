// tb_rram_crossbar: unit test of the 1T1R crossbar model.
//
// Programs random contents into a 16x4 array (the S-box size) row by row, keeping its own
// copy, then drives random word-line patterns with one or two rows selected and checks that
// every bit-line level equals the number of selected LRS cells in that column, and that all
// levels are 0 without the read pulse. It also checks that rewriting a row (set and reset)
// takes effect and leaves the other rows alone.
module tb_rram_crossbar;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 4;

  logic                      clk = 1'b0;
  logic                      wr_en;
  logic [3:0]                wr_row;
  logic [COLS-1:0]           wr_data;
  logic [ROWS-1:0]           wl;
  logic                      sl_rd;
  logic [COLS-1:0][1:0]      bl_lvl;

  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .LVL_W(2)) u_dut (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .wl(wl), .sl_rd(sl_rd), .bl_lvl(bl_lvl));

  task automatic write_row(int unsigned r, logic [COLS-1:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_row = 4'(r); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    model[r] = d;
  endtask

  task automatic read_check(logic [ROWS-1:0] w, bit rd);
    wl = w; sl_rd = rd;
    #1;
    for (int c = 0; c < COLS; c++) begin
      int n;
      n = 0;
      if (rd) for (int r = 0; r < ROWS; r++) if (w[r] && model[r][c]) n++;
      if (n > 3) n = 3;
      checks++;
      if (int'(bl_lvl[c]) != n) begin
        failures++;
        $display("FAIL: wl=%h rd=%0d col %0d level %0d expected %0d", w, rd, c, bl_lvl[c], n);
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; wr_data = 0; wl = 0; sl_rd = 0;
    repeat (2) @(posedge clk);
    for (int r = 0; r < ROWS; r++) write_row(r, 4'($urandom));
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) read_check(16'(1) << r, 1'b1);
    for (int t = 0; t < 200; t++) begin
      int a, b;
      a = $urandom_range(0, ROWS-1);
      b = $urandom_range(0, ROWS-1);
      read_check((16'(1) << a) | (16'(1) << b), 1'b1);
      read_check((16'(1) << a), 1'b0);
    end
    // set all cells of a row, then reset them
    @(negedge clk);
    write_row(7, 4'hf);
    @(negedge clk);
    read_check(16'h0080, 1'b1);
    write_row(7, 4'h0);
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) read_check(16'(1) << r, 1'b1);
    read_check(16'hffff, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
