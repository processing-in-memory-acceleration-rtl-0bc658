// pim_cnn_top: SOT-MRAM processing-in-memory accelerator for low bit-width
// CNN convolution, with power-failure resilient accumulation.
//
// One operation computes one output pixel of a convolutional layer:
//   out = Act(BN(sum_s dot(I_s, W_s) + bias))
// where the window of NUM_SA*k_len elements is split into NUM_SA slices of
// k_len <= COLS elements, one slice per computational sub-array. Raw 8-bit
// elements sit in the Image Bank and Kernel Bank (slice s, element e at
// base + s*k_len + e). The sequence is:
//   1 mapping    for every sub-array: read the slice's weights from the
//                Kernel Bank, quantize them to n_bits, collect them as bit-
//                planes and write C_0(W)..C_{n-1}(W) into rows 0..n_bits-1;
//                the same for the inputs (m_bits) into rows MAX_BITS.. .
//   2 parallel AND and 3 accumulate
//                all sub-arrays run their AND/CMP/ASR/NV-FA loop at once.
//   4 activation the partial sums are added with the bias, normalized and
//                activated by the EPU; the result appears on out_data with a
//                one-cycle out_valid (and done) pulse.
// pwr_good models the supply of the computational sub-arrays' volatile
// logic: when it falls the tiles lose their volatile state and later resume
// from their last NV checkpoint. The banks, the mapping sequencer and the EPU
// are taken to stay powered; that split is this design's choice.
// The block structure (banks, EPU quantizer, sub-arrays with CMP/ASR/NV-FA and
// Ctrl, adder with bias, EPU BN and activation) follows the paper's
// architecture drawing. NUM_SA, the bank organization, the mapping sequencer
// and all port formats are this design's own.
// Timing (cycles): mapping about NUM_SA*(2*(k_len+2)+m_bits+n_bits+2), then
// 3 per bit-plane pair plus checkpoints, then 4 for the EPU.
module pim_cnn_top
  import pim_pkg::*;
#(
  parameter int unsigned NUM_SA            = 4,
  parameter int unsigned ROWS              = 256,
  parameter int unsigned COLS              = 512,
  parameter int unsigned MAX_BITS          = 8,
  parameter int unsigned ACC_W             = 32,
  parameter int unsigned BANK_DEPTH        = 65536,
  parameter int unsigned ELEM_W            = 8,
  parameter int unsigned FRAMES_PER_BACKUP = FRAMES_PER_BACKUP_DEFAULT,
  parameter int unsigned OUT_W             = 40,
  parameter int unsigned S_W               = 16,
  parameter int unsigned FRAC              = 8,
  localparam int unsigned AW   = $clog2(ROWS),
  localparam int unsigned BW   = $clog2(MAX_BITS + 1),
  localparam int unsigned KLW  = $clog2(COLS + 1),
  localparam int unsigned CAW  = $clog2(COLS),
  localparam int unsigned PAW  = (MAX_BITS > 1) ? $clog2(MAX_BITS) : 1,
  localparam int unsigned BAW  = $clog2(BANK_DEPTH),
  localparam int unsigned SAW  = (NUM_SA > 1) ? $clog2(NUM_SA) : 1,
  localparam int unsigned SHW  = $clog2(2 * MAX_BITS - 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           pwr_good,
  // bank loading
  input  logic                           img_we,
  input  logic                           kern_we,
  input  logic [BAW-1:0]                 bank_waddr,
  input  logic [ELEM_W-1:0]              bank_wdata,
  // operation
  input  logic                           start,
  input  logic [BW-1:0]                  m_bits,     // input bit-width
  input  logic [BW-1:0]                  n_bits,     // weight bit-width
  input  logic [KLW-1:0]                 k_len,      // elements per sub-array
  input  logic [BAW-1:0]                 img_base,
  input  logic [BAW-1:0]                 kern_base,
  input  logic signed [OUT_W-1:0]        bias,
  input  logic signed [OUT_W-1:0]        bn_mu,
  input  logic signed [S_W-1:0]          bn_scale,
  input  logic signed [OUT_W-1:0]        bn_beta,
  input  act_mode_e                      act_mode,
  output logic                           busy,
  output logic                           done,
  output logic                           out_valid,
  output logic signed [OUT_W-1:0]        out_data,
  // observation
  output logic [NUM_SA-1:0][ACC_W-1:0]   psum,
  output logic [NUM_SA-1:0]              ev_backup,
  output logic [NUM_SA-1:0]              ev_restore,
  output logic [NUM_SA-1:0]              ev_shift_load,
  output logic [NUM_SA-1:0][SHW-1:0]     ev_shift
);
  localparam logic [AW-1:0] W_BASE  = '0;
  localparam logic [AW-1:0] I_BASE  = AW'(MAX_BITS);
  localparam logic [AW-1:0] RES_ROW = AW'(ROWS - 1);

  typedef enum logic [3:0] {
    T_IDLE, T_MAP_CLR, T_MAP_RD, T_MAP_DRAIN, T_WR, T_START, T_WAIT, T_SUM, T_BN, T_ACT, T_OUT
  } tstate_e;

  tstate_e         st;
  logic            phase;          // 0: weights, 1: inputs
  logic [SAW-1:0]  sa;             // sub-array being mapped
  logic [KLW-1:0]  e_idx;          // element being read
  logic [PAW-1:0]  p_idx;          // plane being written
  logic            rd_v;           // bank data valid this cycle
  logic [CAW-1:0]  rd_col;
  logic [BW-1:0]   k_cur;

  // ---------------- banks ----------------
  logic [BAW-1:0]    rd_addr;
  logic              rd_en;
  logic [ELEM_W-1:0] img_q, kern_q, raw_q;

  assign rd_en   = (st == T_MAP_RD);
  assign rd_addr = (phase ? img_base : kern_base)
                 + BAW'(32'(sa) * 32'(k_len)) + BAW'(e_idx);

  mram_bank #(.DEPTH(BANK_DEPTH), .WIDTH(ELEM_W)) u_image_bank (
    .clk, .we(img_we), .waddr(bank_waddr), .wdata(bank_wdata),
    .re(rd_en && phase), .raddr(rd_addr), .rdata(img_q)
  );
  mram_bank #(.DEPTH(BANK_DEPTH), .WIDTH(ELEM_W)) u_kernel_bank (
    .clk, .we(kern_we), .waddr(bank_waddr), .wdata(bank_wdata),
    .re(rd_en && !phase), .raddr(rd_addr), .rdata(kern_q)
  );
  assign raw_q = phase ? img_q : kern_q;

  // ---------------- EPU quantizer and mapping ----------------
  logic [MAX_BITS-1:0] qval;
  logic [COLS-1:0]     plane_row;

  assign k_cur = phase ? m_bits : n_bits;

  quantizer #(.IN_W(ELEM_W), .MAX_K(MAX_BITS)) u_quant (.x(raw_q), .k(k_cur), .q(qval));

  bitplane_mapper #(.COLS(COLS), .MAX_BITS(MAX_BITS)) u_mapper (
    .clk, .rst_n, .clear(st == T_MAP_CLR), .load(rd_v), .col(rd_col), .value(qval),
    .plane(p_idx), .row(plane_row)
  );

  // ---------------- computational sub-arrays ----------------
  logic [NUM_SA-1:0] t_busy, t_done;

  for (genvar s = 0; s < int'(NUM_SA); s++) begin : g_tile
    compute_tile #(
      .ROWS(ROWS), .COLS(COLS), .MAX_BITS(MAX_BITS), .ACC_W(ACC_W),
      .FRAMES_PER_BACKUP(FRAMES_PER_BACKUP)
    ) u_tile (
      .clk, .rst_n, .pwr_good,
      .wr_en(st == T_WR && 32'(sa) == s),
      .wr_row((phase ? I_BASE : W_BASE) + AW'(p_idx)),
      .wr_data(plane_row),
      .start(st == T_START), .m_bits, .n_bits,
      .w_base(W_BASE), .i_base(I_BASE), .res_row(RES_ROW),
      .busy(t_busy[s]), .done(t_done[s]), .psum(psum[s]),
      .ev_backup(ev_backup[s]), .ev_restore(ev_restore[s]),
      .ev_shift_load(ev_shift_load[s]), .ev_shift(ev_shift[s])
    );
  end

  // ---------------- EPU: adder with bias, BN, activation ----------------
  logic signed [OUT_W-1:0] pre_act, bn_out;

  adder_bias #(.NUM_IN(NUM_SA), .IN_W(ACC_W), .OUT_W(OUT_W)) u_adder (
    .clk, .rst_n, .en(st == T_SUM), .psum, .bias, .y(pre_act)
  );
  batch_norm #(.X_W(OUT_W), .S_W(S_W), .FRAC(FRAC)) u_bn (
    .clk, .rst_n, .en(st == T_BN), .x(pre_act), .mu(bn_mu), .scale(bn_scale),
    .beta(bn_beta), .y(bn_out)
  );
  activation #(.X_W(OUT_W), .FRAC(FRAC)) u_act (
    .clk, .rst_n, .en(st == T_ACT), .mode(act_mode), .x(bn_out), .y(out_data)
  );

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= T_IDLE;
      phase  <= 1'b0;
      sa     <= '0;
      e_idx  <= '0;
      p_idx  <= '0;
      rd_v   <= 1'b0;
      rd_col <= '0;
    end else begin
      rd_v   <= rd_en;
      rd_col <= CAW'(e_idx);
      unique case (st)
        T_IDLE: if (start) begin
          st <= T_MAP_CLR; phase <= 1'b0; sa <= '0;
        end
        T_MAP_CLR: begin
          e_idx <= '0; st <= T_MAP_RD;
        end
        T_MAP_RD: begin
          e_idx <= e_idx + 1'b1;
          if (e_idx + 1'b1 == k_len) st <= T_MAP_DRAIN;
        end
        T_MAP_DRAIN: begin
          p_idx <= '0; st <= T_WR;
        end
        T_WR: begin
          p_idx <= p_idx + 1'b1;
          if (32'(p_idx) + 1 == 32'(k_cur)) begin
            if (!phase) begin
              phase <= 1'b1; st <= T_MAP_CLR;
            end else if (32'(sa) + 1 == NUM_SA) begin
              st <= T_START;
            end else begin
              sa <= sa + 1'b1; phase <= 1'b0; st <= T_MAP_CLR;
            end
          end
        end
        T_START: st <= T_WAIT;
        T_WAIT:  if (&t_done) st <= T_SUM;
        T_SUM:   st <= T_BN;
        T_BN:    st <= T_ACT;
        T_ACT:   st <= T_OUT;
        T_OUT:   st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end

  assign busy      = (st != T_IDLE);
  assign out_valid = (st == T_OUT);
  assign done      = (st == T_OUT);

  a_klen: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_IDLE && start) |-> (k_len >= 1 && 32'(k_len) <= COLS));
  a_tiles_idle_while_mapping: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_WR) |-> !t_busy[sa]);
endmodule
