// cplx_mult: pipelined complex multiplier y = z1 * z2 with three real
// multipliers and a fixed latency of 6 cycles.
//
// With z1 = A + jB and z2 = C + jD the datapath forms
//   Z = A*(C+D),  X = (A+B)*D,  Y = (B-A)*C
//   Re(y) = Z - X = AC - BD,    Im(y) = Z + Y = AD + BC
// in the register stages D1..D5 of the source block diagram: D1 is two
// input registers deep, D2..D5 one register each, 2+1+1+1+1 = 6 cycles.
// The pre-adders sit between D1 and D2 (C+D) and between D2 and D3 (A+B,
// B-A); the three multipliers between D2/D3 (Z) and D3/D4 (X, Y); the two
// post-adders between D4 and D5. The stage layout, adder signs and the
// total delay follow the source diagram; the synchronous reset (which the
// diagram recommends for Xilinx parts) clears every stage.
//
// Interface: z1 is AW bits per part, z2 is BW bits per part, y is
// AW+BW+1 bits per part, full precision. No valid signal: a new product can
// start every cycle and leaves exactly 6 cycles later.
module cplx_mult #(
  parameter int unsigned AW = 16,
  parameter int unsigned BW = 16
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [AW-1:0]    z1_re,
  input  logic signed [AW-1:0]    z1_im,
  input  logic signed [BW-1:0]    z2_re,
  input  logic signed [BW-1:0]    z2_im,
  output logic signed [AW+BW:0]   y_re,
  output logic signed [AW+BW:0]   y_im
);
  localparam int unsigned PW = AW + BW + 2;   // product width
  localparam int unsigned OW = AW + BW + 1;   // output width

  // D1: two input register stages per part
  logic signed [AW-1:0] a1 [2];
  logic signed [AW-1:0] b1 [2];
  logic signed [BW-1:0] c1 [2];
  logic signed [BW-1:0] d1 [2];
  // D2
  logic signed [AW-1:0] a2_1, a2_5, b2_2;
  logic signed [BW-1:0] c2_4, d2_3;
  logic signed [BW:0]   cpd2_6;
  // D3
  logic signed [AW:0]   apb3_1, bma3_3;
  logic signed [BW-1:0] c3_4, d3_2;
  logic signed [PW-1:0] z3_5;
  // D4
  logic signed [PW-1:0] x4_1, y4_2, z4_3;
  // D5
  logic signed [PW-1:0] re5_1, im5_2;

  always_ff @(posedge clk) begin
    if (rst) begin
      a1 <= '{default: '0}; b1 <= '{default: '0};
      c1 <= '{default: '0}; d1 <= '{default: '0};
      a2_1 <= '0; a2_5 <= '0; b2_2 <= '0; c2_4 <= '0; d2_3 <= '0; cpd2_6 <= '0;
      apb3_1 <= '0; bma3_3 <= '0; c3_4 <= '0; d3_2 <= '0; z3_5 <= '0;
      x4_1 <= '0; y4_2 <= '0; z4_3 <= '0;
      re5_1 <= '0; im5_2 <= '0;
    end else begin
      a1[0] <= z1_re; a1[1] <= a1[0];
      b1[0] <= z1_im; b1[1] <= b1[0];
      c1[0] <= z2_re; c1[1] <= c1[0];
      d1[0] <= z2_im; d1[1] <= d1[0];

      a2_1   <= a1[1];
      a2_5   <= a1[1];
      b2_2   <= b1[1];
      c2_4   <= c1[1];
      d2_3   <= d1[1];
      cpd2_6 <= (BW+1)'(c1[1]) + (BW+1)'(d1[1]);

      apb3_1 <= (AW+1)'(a2_1) + (AW+1)'(b2_2);
      bma3_3 <= (AW+1)'(b2_2) - (AW+1)'(a2_1);
      c3_4   <= c2_4;
      d3_2   <= d2_3;
      z3_5   <= PW'(a2_5) * PW'(cpd2_6);

      x4_1   <= PW'(apb3_1) * PW'(d3_2);
      y4_2   <= PW'(bma3_3) * PW'(c3_4);
      z4_3   <= z3_5;

      re5_1  <= z4_3 - x4_1;
      im5_2  <= z4_3 + y4_2;
    end
  end

  assign y_re = re5_1[OW-1:0];
  assign y_im = im5_2[OW-1:0];

endmodule
