// inner_product: pipelined complex inner product y = sum_i conj(u_i) * v_i
// over N-element vectors.
//
// Structure (source Fig. "inner product"): u is conjugated, then N
// cplx_mult instances form the element-wise products v_i * conj(u_i)
// (6 cycles), one register stage follows, and two tree_sum adder trees
// (real and imaginary part) reduce the N products in L = ceil(log2 N)
// cycles. validIn travels through a matching delay line of 6 + 1 + L
// cycles to validOut. Results are full precision: UW+VW+2+L bits per part.
// A new vector pair can enter every cycle.
module inner_product #(
  parameter int unsigned N  = 57,
  parameter int unsigned UW = 24,
  parameter int unsigned VW = 16,
  localparam int unsigned L  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned PW = UW + VW + 2,
  localparam int unsigned YW = PW + L
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [UW-1:0]  u_re [N],
  input  logic signed [UW-1:0]  u_im [N],
  input  logic signed [VW-1:0]  v_re [N],
  input  logic signed [VW-1:0]  v_im [N],
  input  logic                  valid_in,
  output logic signed [YW-1:0]  y_re,
  output logic signed [YW-1:0]  y_im,
  output logic                  valid_out
);
  localparam int unsigned MUL_LAT = 6;
  localparam int unsigned LAT     = MUL_LAT + 1 + L;

  logic signed [PW-1:0] p_re [N];
  logic signed [PW-1:0] p_im [N];
  logic signed [PW-1:0] q_re [N];
  logic signed [PW-1:0] q_im [N];

  for (genvar i = 0; i < N; i++) begin : g_mul
    // conj(u): negate the imaginary part one bit wider so -min fits
    logic signed [UW:0] uc_re, uc_im;
    assign uc_re = (UW+1)'(u_re[i]);
    assign uc_im = -(UW+1)'(u_im[i]);

    cplx_mult #(.AW(VW), .BW(UW+1)) u_mul (
      .clk   (clk),
      .rst   (rst),
      .z1_re (v_re[i]),
      .z1_im (v_im[i]),
      .z2_re (uc_re),
      .z2_im (uc_im),
      .y_re  (p_re[i]),
      .y_im  (p_im[i])
    );
  end

  // the Z^-1 between the products and the adder tree
  always_ff @(posedge clk) begin
    if (rst) begin
      q_re <= '{default: '0};
      q_im <= '{default: '0};
    end else begin
      q_re <= p_re;
      q_im <= p_im;
    end
  end

  tree_sum #(.N(N), .W(PW)) u_sum_re (.clk(clk), .rst(rst), .x(q_re), .y(y_re));
  tree_sum #(.N(N), .W(PW)) u_sum_im (.clk(clk), .rst(rst), .x(q_im), .y(y_im));

  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (rst) vpipe <= '0;
    else     vpipe <= {vpipe[LAT-2:0], valid_in};
  end
  assign valid_out = vpipe[LAT-1];

endmodule
