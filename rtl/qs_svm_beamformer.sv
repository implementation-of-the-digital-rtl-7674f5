// qs_svm_beamformer: the hardware part of the QS-SVM / MVDR digital
// beamformer ("HDL implementation").
//
// Per snapshot the design receives the N element outputs a(t), the
// steering vector h of the desired direction, valid and restart. Each
// input passes one register. The conjugated snapshot conj(a(t)) becomes a
// row of A and h becomes B of the solver, which keeps the Q-less QR factor
// of the exponentially weighted covariance A^H A and solves A^H A x = h.
// The weight update turns x into MVDR weights w = x / (h^H x). After one
// register the weights are brought back to the snapshot rate (downsample),
// and the output stage computes y = w^H a(t) from the registered
// snapshot; y, w and validOut each leave through one more register.
//
// Rates: the solver side runs at RATE processing cycles per snapshot.
// Because of the input register, the snapshot, valid and restart taken
// for a period are those on the inputs in the cycle before sample_tick is
// high (at the clock edge where it rises); a source that holds each
// snapshot for a whole period and changes it while sample_tick is high
// meets this. The
// output stage works every cycle and uses the most recent weights. The
// sequential solver needs far more than RATE cycles per row (see
// qless_qr); rows offered while ready_a is low are skipped, so the weights
// track every k-th snapshot instead of every one. The block structure,
// the one-cycle registers and RATE = 87 follow the source block diagram;
// the solver's sequential form and this row skipping are this design's.
//
// Formats: a(t) and h are IW-bit parts with IF fraction bits; w has WW
// bits and WF fraction bits; y is full precision with IF+WF fraction bits.
module qs_svm_beamformer
  import beamformer_pkg::*;
#(
  parameter int unsigned N    = N_ELEM,
  parameter int unsigned R    = RATE,
  parameter int unsigned IW   = IN_W,
  parameter int unsigned IF   = IN_F,
  parameter int unsigned W    = ACC_W,
  parameter int unsigned F    = ACC_F,
  parameter int unsigned WW   = WGT_W,
  parameter int unsigned WF   = WGT_F,
  parameter real         FF   = LAMBDA,
  localparam int unsigned L   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned YW  = WW + IW + 2 + L
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [IW-1:0] a_re [N],
  input  logic signed [IW-1:0] a_im [N],
  input  logic signed [IW-1:0] sv_re [N],
  input  logic signed [IW-1:0] sv_im [N],
  input  logic                 valid_in,
  input  logic                 restart,
  output logic signed [YW-1:0] y_re,
  output logic signed [YW-1:0] y_im,
  output logic signed [WW-1:0] w_re [N],
  output logic signed [WW-1:0] w_im [N],
  output logic                 valid_out,
  output logic                 ready_a,
  output logic                 ready_b,
  output logic                 sample_tick
);
  localparam int unsigned VB = N * 2 * IW;     // bits of one packed vector
  localparam logic signed [IW-1:0] IMAX = {1'b0, {(IW-1){1'b1}}};
  localparam logic signed [IW-1:0] IMIN = {1'b1, {(IW-1){1'b0}}};

  // ---- input registers (Z^-1) ----
  logic signed [IW-1:0] a_d_re [N], a_d_im [N], sv_d_re [N], sv_d_im [N];
  logic                 valid_d, restart_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      a_d_re  <= '{default: '0};
      a_d_im  <= '{default: '0};
      sv_d_re <= '{default: '0};
      sv_d_im <= '{default: '0};
      valid_d   <= 1'b0;
      restart_d <= 1'b0;
    end else begin
      a_d_re  <= a_re;
      a_d_im  <= a_im;
      sv_d_re <= sv_re;
      sv_d_im <= sv_im;
      valid_d   <= valid_in;
      restart_d <= restart;
    end
  end

  // ---- conj(a(t)) and packing for the repeat stage ----
  logic [2*VB-1:0] up_in, up_out;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      up_in[(2*i)*IW +: IW]        = a_d_re[i];
      // -IMIN does not fit: saturate
      up_in[(2*i+1)*IW +: IW]      = (a_d_im[i] == IMIN) ? IMAX : -a_d_im[i];
      up_in[VB + (2*i)*IW +: IW]   = sv_d_re[i];
      up_in[VB + (2*i+1)*IW +: IW] = sv_d_im[i];
    end
  end

  logic rows_valid, rows_restart, tick;
  rate_up #(.RATE(R), .DW(2*VB)) u_up (
    .clk         (clk),
    .rst         (rst),
    .din         (up_in),
    .valid_in    (valid_d),
    .restart_in  (restart_d),
    .dout        (up_out),
    .valid_out   (rows_valid),
    .restart_out (rows_restart),
    .tick        (tick)
  );
  assign sample_tick = tick;

  logic signed [IW-1:0] ar_re [N], ar_im [N], br_re [N], br_im [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      ar_re[i] = up_out[(2*i)*IW +: IW];
      ar_im[i] = up_out[(2*i+1)*IW +: IW];
      br_re[i] = up_out[VB + (2*i)*IW +: IW];
      br_im[i] = up_out[VB + (2*i+1)*IW +: IW];
    end
  end

  // ---- quadrature programming solver ----
  logic signed [W-1:0] x_re [N], x_im [N];
  logic                x_valid;
  qless_solver #(.N(N), .IW(IW), .IF(IF), .W(W), .F(F), .FF(FF)) u_solver (
    .clk       (clk),
    .rst       (rst),
    .restart   (rows_restart),
    .a_re      (ar_re),
    .a_im      (ar_im),
    .valid_a   (rows_valid),
    .b_re      (br_re),
    .b_im      (br_im),
    .valid_b   (rows_valid),
    .ready_a   (ready_a),
    .ready_b   (ready_b),
    .x_re      (x_re),
    .x_im      (x_im),
    .valid_out (x_valid)
  );

  // ---- weight update (MVDR) ----
  logic signed [WW-1:0] wu_re [N], wu_im [N];
  logic                 wu_valid;
  weight_update #(.N(N), .IW(IW), .IF(IF), .XW(W), .XF(F), .WW(WW), .WF(WF)) u_wu (
    .clk       (clk),
    .rst       (rst),
    .h_re      (br_re),
    .h_im      (br_im),
    .x_re      (x_re),
    .x_im      (x_im),
    .valid_in  (x_valid),
    .w_re      (wu_re),
    .w_im      (wu_im),
    .valid_out (wu_valid)
  );

  // ---- Z^-1 then downsample ----
  localparam int unsigned WB = N * 2 * WW;
  logic [WB-1:0] wu_pk_d, ds_out;
  logic          wu_valid_d, ds_valid;
  always_ff @(posedge clk) begin
    if (rst) begin
      wu_pk_d    <= '0;
      wu_valid_d <= 1'b0;
    end else begin
      for (int i = 0; i < N; i++) begin
        wu_pk_d[(2*i)*WW +: WW]   <= wu_re[i];
        wu_pk_d[(2*i+1)*WW +: WW] <= wu_im[i];
      end
      wu_valid_d <= wu_valid;
    end
  end

  rate_down #(.DW(WB)) u_down (
    .clk       (clk),
    .rst       (rst),
    .tick      (tick),
    .din       (wu_pk_d),
    .valid_in  (wu_valid_d),
    .dout      (ds_out),
    .valid_out (ds_valid)
  );

  logic signed [WW-1:0] wd_re [N], wd_im [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      wd_re[i] = ds_out[(2*i)*WW +: WW];
      wd_im[i] = ds_out[(2*i+1)*WW +: WW];
    end
  end

  // ---- SVM inner product y = w^H a(t) ----
  logic signed [YW-1:0] yi_re, yi_im;
  svm_inner_product #(.N(N), .AW(IW), .WW(WW)) u_svm_ip (
    .clk  (clk),
    .rst  (rst),
    .a_re (a_d_re),
    .a_im (a_d_im),
    .w_re (wd_re),
    .w_im (wd_im),
    .y_re (yi_re),
    .y_im (yi_im)
  );

  // ---- output registers (Z^-1) ----
  always_ff @(posedge clk) begin
    if (rst) begin
      y_re      <= '0;
      y_im      <= '0;
      w_re      <= '{default: '0};
      w_im      <= '{default: '0};
      valid_out <= 1'b0;
    end else begin
      y_re      <= yi_re;
      y_im      <= yi_im;
      w_re      <= wd_re;
      w_im      <= wd_im;
      valid_out <= ds_valid;
    end
  end

endmodule
