// tb_subarray_ctrl: checks the command sequence of the sub-array controller:
// the order of AND row pairs (every weight plane n with every input plane m),
// the ASR shift m+n at each compress step, the checkpoint count (start, every
// 20 frames, end), the cycle count: done rises 3 + 3*P + ceil(P/20) clock edges after the edge that samples start
// for P bit-plane pairs, and the resume point after a power failure.
module tb_subarray_ctrl;
  import pim_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pwr_good = 1, start = 0;
  logic [3:0] m_bits, n_bits;
  logic [7:0] w_base, i_base, res_row, arr_ra, arr_rb, arr_rw;
  logic busy, done, asr_load, fa_clear, fa_add, nv_backup, nv_restore;
  logic [3:0] asr_shift;
  array_cmd_e arr_cmd;
  sense_op_e arr_sel;

  subarray_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_and, n_backup, n_restore, cur_n, cur_m, cyc;
  int first_after_restore;
  logic seen_restore;

  always @(posedge clk) if (rst_n) begin
    if (arr_cmd == ARR_COMPUTE) begin
      cur_n = int'(arr_ra) - int'(w_base);
      cur_m = int'(arr_rb) - int'(i_base);
      if (seen_restore && first_after_restore < 0) first_after_restore = cur_n * int'(m_bits) + cur_m;
      checks++;
      if (arr_sel != SEL_AND || arr_rw != res_row) begin failures++; $display("FAIL AND cmd"); end
      if (!seen_restore || first_after_restore >= 0) begin
        // pairs are visited n-major, m-minor
        if (!seen_restore && (cur_n * int'(m_bits) + cur_m) != n_and) begin
          failures++; $display("FAIL pair order n=%0d m=%0d at %0d", cur_n, cur_m, n_and);
        end
      end
      n_and++;
    end
    if (asr_load) begin
      checks++;
      if (int'(asr_shift) != cur_n + cur_m || arr_cmd != ARR_READ || arr_ra != res_row) begin
        failures++; $display("FAIL shift=%0d exp=%0d", asr_shift, cur_n + cur_m);
      end
    end
    if (nv_backup) n_backup++;
    if (nv_restore) n_restore++;
  end

  task automatic run(input int m, input int n, input int fail_at);
    int p = m * n;
    int exp_cyc = 3 + 3 * p + (p + 19) / 20;
    m_bits = 4'(m); n_bits = 4'(n);
    n_and = 0; n_backup = 0; n_restore = 0; seen_restore = 0; first_after_restore = -1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      if (fail_at > 0 && cyc == fail_at) begin
        pwr_good = 0;
        repeat (4) @(negedge clk);
        pwr_good = 1;
        seen_restore = 1;
      end
      @(negedge clk);
      cyc++;
    end
    if (fail_at == 0) begin
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL cycles=%0d exp=%0d", cyc, exp_cyc); end
      checks++;
      if (n_and != p) begin failures++; $display("FAIL AND count %0d", n_and); end
      checks++;
      if (n_backup != 1 + (p + 19) / 20) begin failures++; $display("FAIL backups %0d", n_backup); end
    end else begin
      checks++;
      if (n_restore != 1) begin failures++; $display("FAIL restores %0d", n_restore); end
      checks++;
      // failure after frame 20..39 resumes at pair 20
      if (first_after_restore != 20) begin
        failures++; $display("FAIL resumed at pair %0d", first_after_restore);
      end
    end
  endtask

  initial begin
    w_base = 8'd0; i_base = 8'd8; res_row = 8'd255; m_bits = 1; n_bits = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 1, 0);
    run(4, 1, 0);
    run(8, 1, 0);
    run(2, 2, 0);
    run(3, 2, 0);
    run(8, 8, 0);
    run(5, 4, 0);
    run(8, 8, 2 + 3 * 25);   // power fails during frame 26
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
