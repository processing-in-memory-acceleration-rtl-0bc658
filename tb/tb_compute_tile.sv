// tb_compute_tile: maps random m-bit inputs and n-bit weights into a tile as
// bit-planes, runs the AND-accumulation and compares the result with the
// integer dot product, for the W:I bit-widths 1:1, 1:4, 1:8, 2:2 and 8:8.
// Also checks that done rises 3 + 3*P + ceil(P/20) edges after start is sampled and the result after a
// power failure in the middle of a window.
module tb_compute_tile;
  import pim_pkg::*;
  localparam int ROWS = 32, COLS = 64, MAXB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pwr_good = 1, wr_en = 0, start = 0;
  logic [4:0] wr_row, w_base, i_base, res_row;
  logic [COLS-1:0] wr_data;
  logic [3:0] m_bits, n_bits;
  logic busy, done, ev_backup, ev_restore, ev_shift_load;
  logic [31:0] psum;
  logic [3:0] ev_shift;

  compute_tile #(.ROWS(ROWS), .COLS(COLS), .MAX_BITS(MAXB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int iv [COLS], wv [COLS];
  int n_restore;
  always @(posedge clk) if (ev_restore) n_restore++;

  task automatic run(input int m, input int n, input int k, input int fail_at);
    longint expect_sum = 0;
    int p = m * n, cyc;
    logic [COLS-1:0] plane;
    for (int c = 0; c < COLS; c++) begin
      iv[c] = (c < k) ? int'($urandom % (1 << m)) : 0;
      wv[c] = (c < k) ? int'($urandom % (1 << n)) : 0;
      expect_sum += longint'(iv[c]) * longint'(wv[c]);
    end
    // weight planes to rows w_base.., input planes to rows i_base..
    for (int b = 0; b < n; b++) begin
      for (int c = 0; c < COLS; c++) plane[c] = wv[c][b];
      @(negedge clk); wr_en = 1; wr_row = w_base + 5'(b); wr_data = plane;
    end
    for (int b = 0; b < m; b++) begin
      for (int c = 0; c < COLS; c++) plane[c] = iv[c][b];
      @(negedge clk); wr_en = 1; wr_row = i_base + 5'(b); wr_data = plane;
    end
    @(negedge clk); wr_en = 0;
    m_bits = 4'(m); n_bits = 4'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      if (fail_at > 0 && cyc == fail_at) begin
        pwr_good = 0;
        repeat (3) @(negedge clk);
        pwr_good = 1;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (longint'(psum) != expect_sum) begin
      failures++; $display("FAIL m=%0d n=%0d psum=%0d exp=%0d", m, n, psum, expect_sum);
    end
    if (fail_at == 0) begin
      checks++;
      if (cyc != 3 + 3 * p + (p + 19) / 20) begin
        failures++; $display("FAIL cycles %0d exp %0d", cyc, 3 + 3 * p + (p + 19) / 20);
      end
    end
  endtask

  initial begin
    w_base = 0; i_base = 8; res_row = 31; wr_row = 0; wr_data = 0; m_bits = 1; n_bits = 1;
    n_restore = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 1, COLS, 0);
    run(4, 1, COLS, 0);
    run(8, 1, 40, 0);
    run(2, 2, COLS, 0);
    run(8, 8, COLS, 0);
    run(8, 8, COLS, 100);
    run(4, 4, 17, 30);
    checks++;
    if (n_restore != 2) begin failures++; $display("FAIL restores %0d", n_restore); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
