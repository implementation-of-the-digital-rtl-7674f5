// rate_up: moves snapshot-rate signals onto the processing clock, which
// runs RATE times faster ("Repeat RATEx" for data, "up RATE" for the
// valid and restart strobes).
//
// A free-running phase counter divides the clock by RATE; tick is high in
// phase 0. In that cycle the data word is sampled and then held for RATE
// cycles (repeat), while valid and restart become one-cycle pulses in the
// first processing cycle of the snapshot and stay low for the other
// RATE-1 cycles (upsampling by zero insertion). A snapshot therefore has to
// be present on the inputs when tick is high. The factor RATE = 87 is the
// source design's; sampling in phase 0 is this design's choice.
module rate_up #(
  parameter int unsigned RATE = 87,
  parameter int unsigned DW   = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] din,
  input  logic          valid_in,
  input  logic          restart_in,
  output logic [DW-1:0] dout,
  output logic          valid_out,
  output logic          restart_out,
  output logic          tick
);
  localparam int unsigned CW = (RATE > 1) ? $clog2(RATE) : 1;
  logic [CW-1:0] phase;

  assign tick = (phase == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase       <= '0;
      dout        <= '0;
      valid_out   <= 1'b0;
      restart_out <= 1'b0;
    end else begin
      phase       <= (int'(phase) == RATE - 1) ? '0 : phase + 1'b1;
      valid_out   <= tick & valid_in;
      restart_out <= tick & restart_in;
      if (tick) dout <= din;
    end
  end

endmodule
