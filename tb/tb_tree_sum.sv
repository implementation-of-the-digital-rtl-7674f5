// tb_tree_sum: self-checking test of tree_sum for N = 57 (the element
// count) and N = 5. Random vectors enter every cycle; each sum must appear
// exactly ceil(log2 N) cycles later and equal the sum formed here.
module tb_tree_sum;
  localparam int W = 20, NT = 300;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  int cyc = 0;

  localparam int NA = 57, LA = 6;
  localparam int NB = 5,  LB = 3;
  logic signed [W-1:0] xa [NA];
  logic signed [W-1:0] xb [NB];
  logic signed [W+LA-1:0] ya;
  logic signed [W+LB-1:0] yb;
  longint ea [NT], eb [NT];

  tree_sum #(.N(NA), .W(W)) dut_a (.clk, .rst, .x(xa), .y(ya));
  tree_sum #(.N(NB), .W(W)) dut_b (.clk, .rst, .x(xb), .y(yb));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cyc > 20000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    foreach (xa[i]) xa[i] = '0;
    foreach (xb[i]) xb[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT + LA; t++) begin
      @(negedge clk);
      if (t < NT) begin
        ea[t] = 0; eb[t] = 0;
        foreach (xa[i]) begin
          xa[i] = (t == 0) ? {1'b1, {(W-1){1'b0}}} : (t == 1) ? {1'b0, {(W-1){1'b1}}} : W'($urandom);
          ea[t] += longint'(xa[i]);
        end
        foreach (xb[i]) begin
          xb[i] = W'($urandom);
          eb[t] += longint'(xb[i]);
        end
      end
      @(posedge clk); #1;
      if (t - LA + 1 >= 0 && t - LA + 1 < NT) begin
        checks++;
        if (longint'(ya) != ea[t-LA+1]) begin
          failures++;
          if (failures < 5) $display("A mismatch %0d exp %0d", ya, ea[t-LA+1]);
        end
      end
      if (t - LB + 1 >= 0 && t - LB + 1 < NT) begin
        checks++;
        if (longint'(yb) != eb[t-LB+1]) begin
          failures++;
          if (failures < 5) $display("B mismatch %0d exp %0d", yb, eb[t-LB+1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
