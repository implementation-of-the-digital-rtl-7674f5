// isqrt_seq: sequential integer square root, q = floor(sqrt(x)).
//
// Digit-by-digit (restoring) method, one result bit per cycle: a pulse on
// start loads x, done pulses RW = XW/2 cycles later with q valid and held
// until the next start. busy is high in between. XW must be even.
module isqrt_seq #(
  parameter int unsigned XW = 96,
  localparam int unsigned RW = XW / 2
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [XW-1:0] x,
  output logic [RW-1:0] q,
  output logic          busy,
  output logic          done
);
  logic [XW-1:0]        rad;     // remaining radicand bits, two per step
  logic [RW+1:0]        rem;     // partial remainder
  logic [$clog2(RW+1)-1:0] cnt;

  logic [RW+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[RW-1:0], rad[XW-1 -: 2]};
    trial  = {q, 2'b01};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      rem  <= '0;
      rad  <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rad  <= x;
        rem  <= '0;
        q    <= '0;
        cnt  <= '0;
      end else if (busy) begin
        rad <= rad << 2;
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          q   <= {q[RW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[RW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == RW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
