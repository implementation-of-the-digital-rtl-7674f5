// qless_solver: the "quadrature programming solver" of the beamformer. It
// solves A^H A X = B by Q-less QR with a forgetting factor, where the rows
// A(i,:) arrive one at a time and B is the steering vector.
//
// For every accepted row the solver first updates the triangular factor R
// (qless_qr: R^H R = sum lambda^(T-t) A_t^H A_t), then runs the forward and
// backward substitution (fwd_back_sub) against the B held in its buffer,
// and pulses valid_out with the new X. B is captured whenever valid_b is
// high while ready_b is high. ready_a and ready_b are low while an update
// or a solve is in progress; a row offered then is not taken (the source
// model leaves its ready outputs unconnected, and so may the user). A
// restart pulse empties R. One that arrives during an update or a solve is
// held until the solver is ready again, so the running solve still reads
// the old R and its X is delivered; the next row then goes into an empty R.
//
// Inputs are IW-bit parts with IF fraction bits; X is W bits with F
// fraction bits. Timing: one row costs the qless_qr update plus one
// fwd_back_sub solve (about 1.5 N^2 + N (3W + 4F) cycles).
module qless_solver
  import beamformer_pkg::*;
#(
  parameter int unsigned N  = N_ELEM,
  parameter int unsigned IW = IN_W,
  parameter int unsigned IF = IN_F,
  parameter int unsigned W  = ACC_W,
  parameter int unsigned F  = ACC_F,
  parameter real         FF = LAMBDA
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 restart,
  input  logic signed [IW-1:0] a_re [N],
  input  logic signed [IW-1:0] a_im [N],
  input  logic                 valid_a,
  input  logic signed [IW-1:0] b_re [N],
  input  logic signed [IW-1:0] b_im [N],
  input  logic                 valid_b,
  output logic                 ready_a,
  output logic                 ready_b,
  output logic signed [W-1:0]  x_re [N],
  output logic signed [W-1:0]  x_im [N],
  output logic                 valid_out
);
  localparam int unsigned AWD = (N > 1) ? $clog2(N) : 1;

  logic                qr_ready, qr_done;
  logic [AWD-1:0]      rd_row, rd_col;
  logic signed [W-1:0] rd_re, rd_im;
  logic                fb_busy, fb_done;
  logic signed [W-1:0] bw_re [N], bw_im [N];

  // B buffer in the internal format
  always_ff @(posedge clk) begin
    if (rst) begin
      bw_re <= '{default: '0};
      bw_im <= '{default: '0};
    end else if (valid_b && ready_b) begin
      for (int i = 0; i < N; i++) begin
        bw_re[i] <= W'(b_re[i]) <<< (F - IF);
        bw_im[i] <= W'(b_im[i]) <<< (F - IF);
      end
    end
  end

  assign ready_a = qr_ready && !fb_busy && !qr_done;
  assign ready_b = ready_a;

  // restart held while busy, passed on once the solver is ready
  logic rs_pend;
  always_ff @(posedge clk) begin
    if (rst)          rs_pend <= 1'b0;
    else if (ready_a) rs_pend <= 1'b0;
    else if (restart) rs_pend <= 1'b1;
  end

  qless_qr #(.N(N), .IW(IW), .IF(IF), .W(W), .F(F), .FF(FF)) u_qr (
    .clk       (clk),
    .rst       (rst),
    .restart   (ready_a && (restart || rs_pend)),
    .row_valid (valid_a && ready_a),
    .row_ready (qr_ready),
    .row_re    (a_re),
    .row_im    (a_im),
    .done      (qr_done),
    .rd_row    (rd_row),
    .rd_col    (rd_col),
    .rd_re     (rd_re),
    .rd_im     (rd_im)
  );

  fwd_back_sub #(.N(N), .W(W), .F(F)) u_sub (
    .clk    (clk),
    .rst    (rst),
    .start  (qr_done),
    .b_re   (bw_re),
    .b_im   (bw_im),
    .rd_row (rd_row),
    .rd_col (rd_col),
    .rd_re  (rd_re),
    .rd_im  (rd_im),
    .x_re   (x_re),
    .x_im   (x_im),
    .busy   (fb_busy),
    .done   (fb_done)
  );

  assign valid_out = fb_done;

  // a row is only taken when the solver is idle
  assert property (@(posedge clk) disable iff (rst) (valid_a && ready_a) |-> qr_ready);

endmodule
