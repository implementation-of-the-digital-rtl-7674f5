// fwd_back_sub: solves R^H R x = b for x, given the upper-triangular
// Q-less QR factor R, by a forward and a backward substitution.
//
//   forward:   R^H y = b   y[i] = (b[i] - sum_{j<i} conj(R[j][i]) y[j]) / R[i][i]
//   backward:  R   x = y   x[i] = (y[i] - sum_{j>i} R[i][j] x[j])       / R[i][i]
//
// The diagonal of R is real. Its N reciprocals are computed once, during
// the forward pass, by a sequential divider and kept for the backward pass;
// a zero diagonal element gives a zero reciprocal, so an unfilled R yields
// x = 0 rather than an overflow. b is held in a buffer from start to the
// end of the solve, y in a second buffer between the two passes; these two
// buffers play the part of the source's "B buffer manager" and "forward
// substitute memory manager", and the R read port that of its "output
// manager". The source streams rows between these blocks; this version
// reads R one element per cycle through rd_row/rd_col (combinational
// rd_re/rd_im) and uses one complex multiply-accumulate.
//
// Interface: start (one cycle, with b valid) -> busy -> done (one cycle)
// with x valid and held. All words are W bits with F fraction bits.
// Timing: about N*(2F+3) + N*N + 2N cycles per solve.
module fwd_back_sub
  import beamformer_pkg::*;
#(
  parameter int unsigned N    = N_ELEM,
  parameter int unsigned W    = ACC_W,
  parameter int unsigned F    = ACC_F,
  localparam int unsigned AWD = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic signed [W-1:0] b_re [N],
  input  logic signed [W-1:0] b_im [N],
  output logic [AWD-1:0]      rd_row,
  output logic [AWD-1:0]      rd_col,
  input  logic signed [W-1:0] rd_re,
  input  logic signed [W-1:0] rd_im,
  output logic signed [W-1:0] x_re [N],
  output logic signed [W-1:0] x_im [N],
  output logic                busy,
  output logic                done
);
  localparam int unsigned DNW = 2 * F + 1;

  typedef enum logic [2:0] {S_IDLE, S_FMAC, S_FDIV, S_FWR, S_BMAC, S_BWR} state_t;
  state_t state;

  logic signed [W-1:0] bb_re [N], bb_im [N];     // B buffer
  logic signed [W-1:0] y_re [N], y_im [N];       // forward-substitution memory
  logic signed [W-1:0] inv_d [N];                // 1 / R[i][i]
  logic [AWD-1:0]      i, j;
  logic signed [W-1:0] acc_re, acc_im;

  function automatic logic signed [W-1:0] fmul(input logic signed [W-1:0] a,
                                               input logic signed [W-1:0] b);
    logic signed [2*W-1:0] p;
    p = (2*W)'(a) * (2*W)'(b);
    return W'(p >>> F);
  endfunction

  // R element addressed this cycle
  always_comb begin
    unique case (state)
      S_FMAC:  begin rd_row = j; rd_col = i; end   // R[j][i], j < i
      S_FDIV:  begin rd_row = i; rd_col = i; end
      S_BMAC:  begin rd_row = i; rd_col = j; end   // R[i][j], j > i
      default: begin rd_row = i; rd_col = i; end
    endcase
  end

  // complex MAC operands
  logic signed [W-1:0] m_re, m_im;
  always_comb begin
    if (state == S_FMAC) begin
      // acc -= conj(R[j][i]) * y[j]
      m_re = fmul(rd_re, y_re[j]) + fmul(rd_im, y_im[j]);
      m_im = fmul(rd_re, y_im[j]) - fmul(rd_im, y_re[j]);
    end else begin
      // acc -= R[i][j] * x[j]
      m_re = fmul(rd_re, x_re[j]) - fmul(rd_im, x_im[j]);
      m_im = fmul(rd_re, x_im[j]) + fmul(rd_im, x_re[j]);
    end
  end

  logic           dv_start, dv_done, dv_busy;
  logic [DNW-1:0] dv_q;
  logic [W-1:0]   dv_den;
  udiv_seq #(.NW(DNW), .DW(W)) u_div (
    .clk(clk), .rst(rst), .start(dv_start), .n(DNW'(1) << (2*F)), .d(dv_den),
    .q(dv_q), .busy(dv_busy), .done(dv_done)
  );

  logic signed [W-1:0] inv_sat;
  always_comb begin
    if (dv_den == '0)                              inv_sat = '0;
    else if (dv_q > DNW'({1'b0, {(W-1){1'b1}}}))   inv_sat = {1'b0, {(W-1){1'b1}}};
    else                                           inv_sat = W'(dv_q);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      dv_start <= 1'b0;
      dv_den   <= '0;
      i        <= '0;
      j        <= '0;
      acc_re   <= '0;
      acc_im   <= '0;
      x_re     <= '{default: '0};
      x_im     <= '{default: '0};
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            bb_re  <= b_re;
            bb_im  <= b_im;
            i      <= '0;
            j      <= '0;
            acc_re <= b_re[0];
            acc_im <= b_im[0];
            // row 0 has no off-diagonal terms
            state  <= S_FDIV;
            dv_den <= '0;
          end
        end
        S_FMAC: begin
          acc_re <= acc_re - m_re;
          acc_im <= acc_im - m_im;
          if (j + 1'b1 == i) state <= S_FDIV;
          else               j <= j + 1'b1;
        end
        S_FDIV: begin
          // launch 1 / R[i][i]; wait for it
          if (!dv_start && !dv_busy && !dv_done) begin
            dv_den   <= (rd_re[W-1]) ? '0 : rd_re;
            dv_start <= 1'b1;
          end
          if (dv_done) begin
            inv_d[i] <= inv_sat;
            state    <= S_FWR;
          end
        end
        S_FWR: begin
          y_re[i] <= fmul(acc_re, inv_d[i]);
          y_im[i] <= fmul(acc_im, inv_d[i]);
          if (int'(i) == N - 1) begin
            // backward pass starts at the last row, which has no terms
            i     <= i;
            acc_re <= fmul(acc_re, inv_d[i]);
            acc_im <= fmul(acc_im, inv_d[i]);
            state <= S_BWR;
          end else begin
            i      <= i + 1'b1;
            j      <= '0;
            acc_re <= bb_re[i + 1'b1];
            acc_im <= bb_im[i + 1'b1];
            state  <= S_FMAC;
          end
        end
        S_BMAC: begin
          acc_re <= acc_re - m_re;
          acc_im <= acc_im - m_im;
          if (int'(j) == N - 1) state <= S_BWR;
          else                  j <= j + 1'b1;
        end
        S_BWR: begin
          x_re[i] <= fmul(acc_re, inv_d[i]);
          x_im[i] <= fmul(acc_im, inv_d[i]);
          if (i == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            i      <= i - 1'b1;
            j      <= i;
            acc_re <= y_re[i - 1'b1];
            acc_im <= y_im[i - 1'b1];
            state  <= S_BMAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
