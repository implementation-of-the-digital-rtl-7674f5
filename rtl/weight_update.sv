// weight_update: MVDR weight normalisation w = x / (h^H x).
//
// x is the solver output x = (A^H A)^-1 h and h the steering vector, so w
// is the MVDR weight vector R^-1 h / (h^H R^-1 h), whose response in the
// steering direction is w^H h = 1 (0 dB for the desired signal). The
// normalisation follows the MVDR solution of the source design; the
// datapath is this design's: on valid_in, x and h are latched; one complex
// multiply-accumulate forms d = Re(h^H x) over N cycles (for a Hermitian
// positive definite A^H A the imaginary part is zero), a sequential divider
// forms 1/|d|, and N more cycles scale the elements of x, restore the sign
// of d and round them into the WW-bit weight format (WF fraction bits,
// saturating). d = 0 gives w = 0.
//
// Interface: h is IW bits with IF fraction bits, x is XW bits with XF
// fraction bits. valid_out pulses once w is complete; w is held until the
// next update. Timing: 2N + 2XF + 4 cycles from valid_in to valid_out.
module weight_update
  import beamformer_pkg::*;
#(
  parameter int unsigned N  = N_ELEM,
  parameter int unsigned IW = IN_W,
  parameter int unsigned IF = IN_F,
  parameter int unsigned XW = ACC_W,
  parameter int unsigned XF = ACC_F,
  parameter int unsigned WW = WGT_W,
  parameter int unsigned WF = WGT_F
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [IW-1:0] h_re [N],
  input  logic signed [IW-1:0] h_im [N],
  input  logic signed [XW-1:0] x_re [N],
  input  logic signed [XW-1:0] x_im [N],
  input  logic                 valid_in,
  output logic signed [WW-1:0] w_re [N],
  output logic signed [WW-1:0] w_im [N],
  output logic                 valid_out
);
  localparam int unsigned DNW = 2 * XF + 1;
  localparam int unsigned AWD = (N > 1) ? $clog2(N) : 1;
  localparam logic signed [XW-1:0] XMAX = {1'b0, {(XW-1){1'b1}}};
  localparam logic signed [WW-1:0] WMAX = {1'b0, {(WW-1){1'b1}}};
  localparam logic signed [WW-1:0] WMIN = {1'b1, {(WW-1){1'b0}}};

  typedef enum logic [1:0] {S_IDLE, S_DOT, S_DIV, S_SCALE} state_t;
  state_t state;

  logic signed [XW-1:0] xs_re [N], xs_im [N];
  logic signed [XW-1:0] hs_re [N], hs_im [N];
  logic signed [XW-1:0] d_acc, inv_d;
  logic                 d_neg;
  logic [AWD-1:0]       i;

  function automatic logic signed [XW-1:0] fmul(input logic signed [XW-1:0] a,
                                                input logic signed [XW-1:0] b);
    logic signed [2*XW-1:0] p;
    p = (2*XW)'(a) * (2*XW)'(b);
    return XW'(p >>> XF);
  endfunction

  // round an XF-fraction word to WF fraction bits with saturation
  function automatic logic signed [WW-1:0] to_w(input logic signed [XW-1:0] v);
    logic signed [XW:0] r;
    r = ((XW+1)'(v) + ((XW+1)'(1) <<< (XF - WF - 1))) >>> (XF - WF);
    if (r > (XW+1)'(WMAX))      return WMAX;
    else if (r < (XW+1)'(WMIN)) return WMIN;
    else                        return WW'(r);
  endfunction

  logic           dv_start, dv_busy, dv_done;
  logic [DNW-1:0] dv_q;
  logic [XW-1:0]  dv_den;
  udiv_seq #(.NW(DNW), .DW(XW)) u_div (
    .clk(clk), .rst(rst), .start(dv_start), .n(DNW'(1) << (2*XF)), .d(dv_den),
    .q(dv_q), .busy(dv_busy), .done(dv_done)
  );

  logic signed [XW-1:0] wv_re, wv_im;
  always_comb begin
    wv_re = fmul(xs_re[i], inv_d);
    wv_im = fmul(xs_im[i], inv_d);
    if (d_neg) begin
      wv_re = -wv_re;
      wv_im = -wv_im;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      valid_out <= 1'b0;
      dv_start  <= 1'b0;
      dv_den    <= '0;
      d_acc     <= '0;
      d_neg     <= 1'b0;
      inv_d     <= '0;
      i         <= '0;
      w_re      <= '{default: '0};
      w_im      <= '{default: '0};
    end else begin
      valid_out <= 1'b0;
      dv_start  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (valid_in) begin
            xs_re <= x_re;
            xs_im <= x_im;
            for (int k = 0; k < N; k++) begin
              hs_re[k] <= XW'(h_re[k]) <<< (XF - IF);
              hs_im[k] <= XW'(h_im[k]) <<< (XF - IF);
            end
            d_acc <= '0;
            i     <= '0;
            state <= S_DOT;
          end
        end
        S_DOT: begin
          // Re(conj(h) x) = h_re x_re + h_im x_im
          d_acc <= d_acc + fmul(hs_re[i], xs_re[i]) + fmul(hs_im[i], xs_im[i]);
          if (int'(i) == N - 1) begin
            state <= S_DIV;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_DIV: begin
          if (!dv_start && !dv_busy && !dv_done) begin
            d_neg    <= d_acc[XW-1];
            dv_den   <= d_acc[XW-1] ? XW'(-d_acc) : XW'(d_acc);
            dv_start <= 1'b1;
          end
          if (dv_done) begin
            if (dv_den == '0)                  inv_d <= '0;
            else if (dv_q > DNW'(XMAX))        inv_d <= XMAX;
            else                               inv_d <= XW'(dv_q);
            i     <= '0;
            state <= S_SCALE;
          end
        end
        S_SCALE: begin
          w_re[i] <= to_w(wv_re);
          w_im[i] <= to_w(wv_im);
          if (int'(i) == N - 1) begin
            valid_out <= 1'b1;
            state     <= S_IDLE;
          end else begin
            i <= i + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
