// svm_inner_product: the beamformer output stage y = w^H a(t).
//
// An inner_product (u = weights w, v = snapshot a(t)) runs with validIn
// tied high, so a snapshot enters every clock cycle; its result is caught
// in a register enabled by the inner product's validOut (the enabled Z^-1
// of the source diagram). y therefore follows the inputs 6 + 1 + L + 1
// cycles later, L = ceil(log2 N). Output words are full precision,
// WW+AW+2+L bits per part; with a(t) in Q.AF and w in Q.WF the result has
// AF+WF fraction bits.
module svm_inner_product #(
  parameter int unsigned N  = 57,
  parameter int unsigned AW = 16,
  parameter int unsigned WW = 24,
  localparam int unsigned L  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned YW = WW + AW + 2 + L
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [AW-1:0]  a_re [N],
  input  logic signed [AW-1:0]  a_im [N],
  input  logic signed [WW-1:0]  w_re [N],
  input  logic signed [WW-1:0]  w_im [N],
  output logic signed [YW-1:0]  y_re,
  output logic signed [YW-1:0]  y_im
);
  logic signed [YW-1:0] ip_re, ip_im;
  logic                 ip_valid;

  inner_product #(.N(N), .UW(WW), .VW(AW)) u_ip (
    .clk       (clk),
    .rst       (rst),
    .u_re      (w_re),
    .u_im      (w_im),
    .v_re      (a_re),
    .v_im      (a_im),
    .valid_in  (1'b1),
    .y_re      (ip_re),
    .y_im      (ip_im),
    .valid_out (ip_valid)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      y_re <= '0;
      y_im <= '0;
    end else if (ip_valid) begin
      y_re <= ip_re;
      y_im <= ip_im;
    end
  end

endmodule
