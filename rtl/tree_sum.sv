// tree_sum: sum of N signed words by a binary adder tree with one register
// per tree level ("tree sum with distributed pipelining").
//
// The N inputs are zero-padded to the next power of two P = 2**L; level l
// holds P/2**l registered partial sums, so the sum leaves L = ceil(log2 N)
// cycles after its inputs and a new sum can enter every cycle. The output
// is W+L bits wide and cannot overflow. That the tree is pipelined follows
// the source design; one register per level (the latency d of its valid
// path) is this design's choice.
module tree_sum #(
  parameter int unsigned N = 57,
  parameter int unsigned W = 16,
  localparam int unsigned L  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OW = W + L
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [W-1:0]  x [N],
  output logic signed [OW-1:0] y
);
  localparam int unsigned P = 1 << L;

  logic signed [OW-1:0] leaf [P];

  always_comb begin
    for (int i = 0; i < P; i++) begin
      leaf[i] = (i < N) ? OW'(x[i]) : '0;
    end
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    localparam int unsigned M = P >> l;
    logic signed [OW-1:0] s [M];
    for (genvar i = 0; i < M; i++) begin : g_node
      if (l == 1) begin : g_first
        always_ff @(posedge clk) begin
          if (rst) s[i] <= '0;
          else     s[i] <= leaf[2*i] + leaf[2*i+1];
        end
      end else begin : g_next
        always_ff @(posedge clk) begin
          if (rst) s[i] <= '0;
          else     s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
        end
      end
    end
  end

  assign y = g_lvl[L].s[0];

endmodule
