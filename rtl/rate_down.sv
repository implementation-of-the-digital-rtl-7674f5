// rate_down: returns a processing-clock result to the snapshot rate
// ("Downsample" by RATE).
//
// The output is updated only in the cycles where tick (phase 0 of the
// snapshot period, from rate_up) is high, i.e. it keeps one sample in
// RATE. Because a result of the sequential solver appears for a single
// cycle at an arbitrary phase, a result that arrives between ticks is
// held and released at the next tick, with valid_out high for that one
// cycle; a newer result overwrites an unreleased older one. dout holds its
// value between updates. Downsampling by the snapshot factor follows the
// source design; holding a pending result is this design's choice.
module rate_down #(
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          tick,
  input  logic [DW-1:0] din,
  input  logic          valid_in,
  output logic [DW-1:0] dout,
  output logic          valid_out
);
  logic [DW-1:0] hold;
  logic          pending;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold      <= '0;
      pending   <= 1'b0;
      dout      <= '0;
      valid_out <= 1'b0;
    end else begin
      valid_out <= 1'b0;
      if (tick) begin
        if (valid_in) begin
          dout      <= din;
          valid_out <= 1'b1;
        end else if (pending) begin
          dout      <= hold;
          valid_out <= 1'b1;
        end
        pending <= 1'b0;
      end else if (valid_in) begin
        hold    <= din;
        pending <= 1'b1;
      end
    end
  end

endmodule
