// qless_qr: recursive Q-less QR decomposition with a forgetting factor.
//
// Keeps the N x N upper-triangular factor R with R^H R = sum_t lambda^(T-t)
// a_t^H a_t over all rows a_t received since the last restart; Q is never
// formed. For each new row a the stored R is scaled by sqrt(lambda) and the
// row is annihilated against it with complex Givens rotations, column by
// column:
//   r = sqrt(lambda) R[k][k] (real, >= 0),   x = a[k]
//   rho = sqrt(r^2 + |x|^2),  c = r / rho,  s = x / rho
//   R[k][k] <- rho
//   for j > k:  t = sqrt(lambda) R[k][j]
//               R[k][j] <- c t + conj(s) a[j],   a[j] <- c a[j] - s t
// so the diagonal of R stays real and non-negative. Scaling by the square
// root of the forgetting factor and the Q-less recursive QR follow the
// source design; this implementation is a single sequential rotation unit
// (isqrt_seq and udiv_seq give rho and 1/rho), which is this design's own
// choice in place of the source's partial-systolic array.
//
// Interface: row_valid/row_ready handshake for one row (IN_W-bit parts,
// IN_F fraction bits). done pulses when R is updated. restart empties R
// (every row is marked empty and reads as zero until rewritten): at once
// when idle, together with a row offered in the same cycle (that row then
// goes into an empty R), or, when it arrives during an update, when the
// next row is taken (R stays readable until then). The
// read port rd_row/rd_col -> rd_re/rd_im is combinational and returns
// R[rd_row][rd_col] (zero below the diagonal) in ACC_W-bit words with ACC_F fraction bits; it is
// meant to be used while row_ready is high.
// Timing: one row takes at most N*(W + 2F + 8) + N*(N-1)/2 cycles
// (7 980 cycles at the default N = 57).
module qless_qr
  import beamformer_pkg::*;
#(
  parameter int unsigned N      = N_ELEM,
  parameter int unsigned IW     = IN_W,
  parameter int unsigned IF     = IN_F,
  parameter int unsigned W      = ACC_W,
  parameter int unsigned F      = ACC_F,
  parameter real         FF     = LAMBDA,
  localparam int unsigned AWD   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 restart,
  input  logic                 row_valid,
  output logic                 row_ready,
  input  logic signed [IW-1:0] row_re [N],
  input  logic signed [IW-1:0] row_im [N],
  output logic                 done,
  input  logic [AWD-1:0]       rd_row,
  input  logic [AWD-1:0]       rd_col,
  output logic signed [W-1:0]  rd_re,
  output logic signed [W-1:0]  rd_im
);
  localparam logic signed [W-1:0] ONE     = W'(1) <<< F;
  localparam logic signed [W-1:0] SQRT_FF = W'($rtoi($sqrt(FF) * (2.0 ** F) + 0.5));
  localparam int unsigned DNW = 2 * F + 1;   // dividend 2^(2F)

  typedef enum logic [2:0] {S_IDLE, S_DIAG, S_SQRT, S_DIV, S_ROT, S_ROW} state_t;
  state_t state;

  // R storage, row-major, upper triangle used
  logic signed [W-1:0] mem_re [N*N];
  logic signed [W-1:0] mem_im [N*N];
  logic [N-1:0]        row_live;

  // working row
  logic signed [W-1:0] a_re [N];
  logic signed [W-1:0] a_im [N];

  logic [AWD-1:0]      k;
  logic [AWD:0]        j;      // one bit wider: runs to N
  logic signed [W-1:0] r_kk, c, s_re, s_im, rho;

  // fixed-point helpers
  function automatic logic signed [W-1:0] fmul(input logic signed [W-1:0] x,
                                               input logic signed [W-1:0] y);
    logic signed [2*W-1:0] p;
    p = (2*W)'(x) * (2*W)'(y);
    return W'(p >>> F);
  endfunction

  function automatic int unsigned idx(input int unsigned r, input int unsigned col);
    return r * N + col;
  endfunction

  // j below N as an element index
  logic [AWD-1:0] jn;
  assign jn = j[AWD-1:0];

  // read helpers (empty rows read as zero)
  logic signed [W-1:0] rkj_re, rkj_im;
  always_comb begin
    rkj_re = row_live[k] ? mem_re[idx(int'(k), int'(j))] : '0;
    rkj_im = row_live[k] ? mem_im[idx(int'(k), int'(j))] : '0;
  end
  logic rd_live;
  assign rd_live = row_live[rd_row] && (rd_col >= rd_row);
  assign rd_re = rd_live ? mem_re[idx(int'(rd_row), int'(rd_col))] : '0;
  assign rd_im = rd_live ? mem_im[idx(int'(rd_row), int'(rd_col))] : '0;

  // rho^2 = r^2 + |x|^2 at 2F fraction bits
  logic [2*W-1:0] rho2;
  logic signed [2*W-1:0] sq_r, sq_xr, sq_xi;
  always_comb begin
    sq_r  = (2*W)'(r_kk)    * (2*W)'(r_kk);
    sq_xr = (2*W)'(a_re[k]) * (2*W)'(a_re[k]);
    sq_xi = (2*W)'(a_im[k]) * (2*W)'(a_im[k]);
    rho2  = (2*W)'(sq_r + sq_xr + sq_xi);
  end

  logic          sq_start, sq_busy, sq_done;
  logic [W-1:0]  sq_q;
  logic          dv_start, dv_busy, dv_done;
  logic [DNW-1:0] dv_q;

  isqrt_seq #(.XW(2*W)) u_sqrt (
    .clk(clk), .rst(rst), .start(sq_start), .x(rho2),
    .q(sq_q), .busy(sq_busy), .done(sq_done)
  );

  udiv_seq #(.NW(DNW), .DW(W)) u_div (
    .clk(clk), .rst(rst), .start(dv_start), .n(DNW'(1) << (2*F)), .d(rho),
    .q(dv_q), .busy(dv_busy), .done(dv_done)
  );

  // 1/rho saturated to the word
  logic signed [W-1:0] inv_rho;
  assign inv_rho = (dv_q > DNW'({1'b0, {(W-1){1'b1}}})) ? {1'b0, {(W-1){1'b1}}}
                                                          : W'(dv_q);

  // one rotation of element j of row k
  logic signed [W-1:0] t_re, t_im, nr_re, nr_im, na_re, na_im;
  always_comb begin
    t_re  = fmul(SQRT_FF, rkj_re);
    t_im  = fmul(SQRT_FF, rkj_im);
    // R <- c t + conj(s) a
    nr_re = fmul(c, t_re) + fmul(s_re, a_re[jn]) + fmul(s_im, a_im[jn]);
    nr_im = fmul(c, t_im) + fmul(s_re, a_im[jn]) - fmul(s_im, a_re[jn]);
    // a <- c a - s t
    na_re = fmul(c, a_re[jn]) - (fmul(s_re, t_re) - fmul(s_im, t_im));
    na_im = fmul(c, a_im[jn]) - (fmul(s_re, t_im) + fmul(s_im, t_re));
  end

  assign row_ready = (state == S_IDLE);

  // restart seen during an update, applied with the next row
  logic clr_pend, clr;
  assign clr = restart || clr_pend;
  always_ff @(posedge clk) begin
    if (rst)                                          clr_pend <= 1'b0;
    else if (state == S_IDLE && (row_valid || restart)) clr_pend <= 1'b0;
    else if (restart)                                 clr_pend <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      row_live <= '0;
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      k        <= '0;
      j        <= '0;
      r_kk     <= '0;
      rho      <= '0;
      c        <= '0;
      s_re     <= '0;
      s_im     <= '0;
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (restart || (clr_pend && row_valid)) row_live <= '0;
          if (row_valid) begin
            for (int i = 0; i < N; i++) begin
              a_re[i] <= W'(row_re[i]) <<< (F - IF);
              a_im[i] <= W'(row_im[i]) <<< (F - IF);
            end
            k     <= '0;
            r_kk  <= fmul(SQRT_FF, (row_live[0] && !clr) ? mem_re[0] : '0);
            state <= S_DIAG;
          end
        end
        S_DIAG: begin
          sq_start <= 1'b1;
          state    <= S_SQRT;
        end
        S_SQRT: begin
          if (sq_done) begin
            rho <= W'(sq_q);
            if (sq_q == '0) begin
              // nothing to rotate: c = 1, s = 0
              c     <= ONE;
              s_re  <= '0;
              s_im  <= '0;
              state <= S_ROT;
            end else begin
              dv_start <= 1'b1;
              state    <= S_DIV;
            end
          end
        end
        S_DIV: begin
          if (dv_done) begin
            c     <= fmul(r_kk, inv_rho);
            s_re  <= fmul(a_re[k], inv_rho);
            s_im  <= fmul(a_im[k], inv_rho);
            state <= S_ROT;
          end
        end
        S_ROT: begin
          mem_re[idx(int'(k), int'(k))] <= rho;
          mem_im[idx(int'(k), int'(k))] <= '0;
          a_re[k]                       <= '0;
          a_im[k]                       <= '0;
          j                             <= {1'b0, k} + 1'b1;
          state                         <= S_ROW;
        end
        S_ROW: begin
          if (int'(j) < N) begin
            mem_re[idx(int'(k), int'(j))] <= nr_re;
            mem_im[idx(int'(k), int'(j))] <= nr_im;
            a_re[jn]                      <= na_re;
            a_im[jn]                      <= na_im;
          end
          if (int'(j) >= N - 1) begin
            row_live[k] <= 1'b1;
            if (int'(k) == N - 1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              k     <= k + 1'b1;
              r_kk  <= fmul(SQRT_FF, row_live[k + 1'b1] ? mem_re[idx(int'(k) + 1, int'(k) + 1)] : '0);
              state <= S_DIAG;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the square root and the divider are only started when idle
  assert property (@(posedge clk) disable iff (rst) sq_start |-> !sq_busy);
  assert property (@(posedge clk) disable iff (rst) dv_start |-> !dv_busy);

endmodule
