// tb_pim_cnn_top: end-to-end test of the accelerator at its default size
// (4 sub-arrays of 256 x 512 cells, 64 KiB banks). Random raw bytes are
// loaded into the Image and Kernel Banks; then output pixels are computed
// for the W:I bit-widths 1:1, 1:4, 1:8 and 2:2 and for 8:8 with a power
// failure in the middle of the accumulation. Each result is compared with a
// model that quantizes the raw bytes, forms the dot product of every slice,
// adds the bias, applies batch normalization and the activation. The test
// counts the mechanisms it exercised: parallel AND/compress steps, non-zero
// shifts, periodic checkpoints, power-failure restores and every activation
// mode, and fails if one never happened.
module tb_pim_cnn_top;
  import pim_pkg::*;
  localparam int NSA = 4, COLS = 512, DEPTH = 65536;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, pwr_good = 1;
  logic img_we = 0, kern_we = 0;
  logic [15:0] bank_waddr, img_base, kern_base;
  logic [7:0] bank_wdata;
  logic start = 0;
  logic [3:0] m_bits, n_bits;
  logic [9:0] k_len;
  logic signed [39:0] bias, bn_mu, bn_beta, out_data;
  logic signed [15:0] bn_scale;
  act_mode_e act_mode;
  logic busy, done, out_valid;
  logic [NSA-1:0][31:0] psum;
  logic [NSA-1:0] ev_backup, ev_restore, ev_shift_load;
  logic [NSA-1:0][3:0] ev_shift;

  pim_cnn_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_compress, n_shift_nz, n_backup, n_restore, n_periodic;
  int n_act [4];
  int frames_since [NSA];
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSA; s++) begin
      if (ev_shift_load[s]) begin
        n_compress++;
        if (ev_shift[s] != 0) n_shift_nz++;
        frames_since[s]++;
      end
      if (ev_backup[s]) begin
        n_backup++;
        if (frames_since[s] == 20) n_periodic++;
        frames_since[s] = 0;
      end
      if (ev_restore[s]) n_restore++;
    end
  end

  byte unsigned img [DEPTH], kern [DEPTH];

  function automatic longint quant(input int x, input int k);
    return longint'($floor(real'((1 << k) - 1) * real'(x) / 255.0 + 0.5));
  endfunction

  function automatic longint floor_div256(input longint d);
    return (d >= 0) ? d / 256 : -((-d + 255) / 256);
  endfunction

  function automatic longint act_ref(input int md, input longint v);
    longint h;
    case (md)
      0: return v;
      1: return (v < 0) ? 0 : v;
      2: return (v < 0) ? 0 : 1;
      default: begin
        h = 128 + ((v >= 0) ? v / 2 : -((-v + 1) / 2));
        if (h < 0) h = 0;
        if (h > 256) h = 256;
        return h;
      end
    endcase
  endfunction

  task automatic op(input int m, input int n, input int k, input int ib, input int kb,
                    input int md, input bit fail);
    longint ps [NSA];
    longint pre, bn, exp_out;
    int cyc;
    for (int s = 0; s < NSA; s++) begin
      ps[s] = 0;
      for (int e = 0; e < k; e++)
        ps[s] += quant(img[ib + s * k + e], m) * quant(kern[kb + s * k + e], n);
    end
    bias = 40'(longint'($signed($urandom % 2000)) - 1000);
    bn_mu = 40'(longint'($urandom % 500));
    bn_scale = 16'(int'($urandom % 600) - 100);
    bn_beta = 40'(longint'($signed($urandom % 200)) - 100);
    pre = bias;
    for (int s = 0; s < NSA; s++) pre += ps[s];
    bn = floor_div256((pre - longint'(bn_mu)) * longint'(bn_scale)) + longint'(bn_beta);
    exp_out = act_ref(md, bn);

    m_bits = 4'(m); n_bits = 4'(n); k_len = 10'(k);
    img_base = 16'(ib); kern_base = 16'(kb); act_mode = act_mode_e'(md);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    if (fail) begin
      // wait for the start checkpoint of the sub-arrays, then fail later
      while (!ev_backup[0]) @(negedge clk);
      repeat (80) @(negedge clk);
      pwr_good = 0;
      repeat (6) @(negedge clk);
      pwr_good = 1;
    end
    while (!out_valid) begin
      @(negedge clk);
      cyc++;
    end
    for (int s = 0; s < NSA; s++) begin
      checks++;
      if (longint'(psum[s]) != ps[s]) begin
        failures++; $display("FAIL W:I=%0d:%0d tile %0d psum=%0d exp=%0d", n, m, s, psum[s], ps[s]);
      end
    end
    checks++;
    if (longint'(out_data) != exp_out || !done) begin
      failures++; $display("FAIL W:I=%0d:%0d out=%0d exp=%0d", n, m, out_data, exp_out);
    end
    n_act[md]++;
    $display("op W:I=%0d:%0d k=%0d act=%0d: out=%0d (pre-activation %0d)", n, m, k, md, out_data, pre);
  endtask

  initial begin
    bank_waddr = 0; bank_wdata = 0; m_bits = 1; n_bits = 1; k_len = 1;
    img_base = 0; kern_base = 0; bias = 0; bn_mu = 0; bn_scale = 0; bn_beta = 0;
    act_mode = ACT_NONE;
    n_compress = 0; n_shift_nz = 0; n_backup = 0; n_restore = 0; n_periodic = 0;
    for (int i = 0; i < 4; i++) n_act[i] = 0;
    for (int s = 0; s < NSA; s++) frames_since[s] = 0;
    for (int i = 0; i < DEPTH; i++) begin img[i] = 0; kern[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load the two banks (region 0..2*NSA*COLS-1)
    for (int a = 0; a < 2 * NSA * COLS; a++) begin
      @(negedge clk);
      img[a] = 8'($urandom); kern[a] = 8'($urandom);
      img_we = 1; kern_we = 0; bank_waddr = 16'(a); bank_wdata = img[a];
      @(negedge clk);
      img_we = 0; kern_we = 1; bank_wdata = kern[a];
    end
    @(negedge clk); kern_we = 0;

    op(1, 1, COLS, 0, 0, 2, 0);          // W:I 1:1, sign activation
    op(4, 1, COLS, 100, 7, 1, 0);        // W:I 1:4, ReLU
    op(8, 1, COLS, 2048, 2048, 3, 0);    // W:I 1:8, (tanh+1)/2
    op(2, 2, 300, 33, 999, 0, 0);        // W:I 2:2, no activation
    op(8, 8, COLS, 5, 1500, 1, 1);       // 8:8 with a power failure

    checks++; if (n_compress == 0) begin failures++; $display("FAIL no AND/compress step"); end
    checks++; if (n_shift_nz == 0) begin failures++; $display("FAIL no non-zero shift"); end
    checks++; if (n_periodic == 0) begin failures++; $display("FAIL no periodic checkpoint"); end
    checks++; if (n_restore == 0) begin failures++; $display("FAIL no restore"); end
    for (int i = 0; i < 4; i++) begin
      checks++; if (n_act[i] == 0) begin failures++; $display("FAIL act mode %0d unused", i); end
    end
    $display("mechanisms: compress=%0d nonzero_shift=%0d backups=%0d periodic=%0d restores=%0d",
             n_compress, n_shift_nz, n_backup, n_periodic, n_restore);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
