// tb_svm_inner_product: self-checking test of svm_inner_product (N = 57,
// 16-bit a(t), 24-bit w). A new snapshot and weight vector enter every
// cycle; y must equal w^H a(t) of the inputs applied exactly 14 cycles
// earlier (13 cycles of inner product plus the enabled output register).
module tb_svm_inner_product;
  localparam int N = 57, AW = 16, WW = 24, L = 6, LAT = 14, NT = 300;
  localparam int YW = WW + AW + 2 + L;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0, cyc = 0;
  logic signed [AW-1:0] a_re [N], a_im [N];
  logic signed [WW-1:0] w_re [N], w_im [N];
  logic signed [YW-1:0] y_re, y_im;
  longint er [NT + LAT + 2], ei [NT + LAT + 2];

  svm_inner_product #(.N(N), .AW(AW), .WW(WW)) dut (.*);

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
    foreach (a_re[i]) begin a_re[i] = 0; a_im[i] = 0; w_re[i] = 0; w_im[i] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT + LAT; t++) begin
      @(negedge clk);
      if (t < NT) begin
        er[t] = 0; ei[t] = 0;
        for (int i = 0; i < N; i++) begin
          a_re[i] = AW'($urandom); a_im[i] = AW'($urandom);
          w_re[i] = WW'($urandom); w_im[i] = WW'($urandom);
          er[t] += longint'(w_re[i]) * longint'(a_re[i]) + longint'(w_im[i]) * longint'(a_im[i]);
          ei[t] += longint'(w_re[i]) * longint'(a_im[i]) - longint'(w_im[i]) * longint'(a_re[i]);
        end
      end
      @(posedge clk); #1;
      if (t - LAT + 1 >= 0 && t - LAT + 1 < NT) begin
        checks++;
        if (longint'(y_re) != er[t-LAT+1] || longint'(y_im) != ei[t-LAT+1]) begin
          failures++;
          if (failures < 5) $display("mismatch at %0d", t - LAT + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
