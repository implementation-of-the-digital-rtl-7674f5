// udiv_seq: sequential unsigned restoring divider, q = floor(n / d).
//
// One quotient bit per cycle: a pulse on start loads n and d, done pulses
// NW cycles later with q valid and held. Division by zero returns all ones.
module udiv_seq #(
  parameter int unsigned NW = 57,
  parameter int unsigned DW = 48
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] n,
  input  logic [DW-1:0] d,
  output logic [NW-1:0] q,
  output logic          busy,
  output logic          done
);
  logic [NW-1:0]           num;
  logic [DW-1:0]           den;
  logic [DW:0]             rem;
  logic [$clog2(NW+1)-1:0] cnt;

  logic [DW:0] rem_sh;
  assign rem_sh = {rem[DW-1:0], num[NW-1]};

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      num  <= '0;
      den  <= '0;
      rem  <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        num  <= n;
        den  <= d;
        rem  <= '0;
        q    <= '0;
        cnt  <= '0;
      end else if (busy) begin
        num <= num << 1;
        if (rem_sh >= {1'b0, den}) begin
          rem <= rem_sh - {1'b0, den};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == NW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
