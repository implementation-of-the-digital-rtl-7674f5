// tb_inner_product: self-checking test of inner_product at N = 57 with
// 24-bit u and 16-bit v. Random vectors enter with a random valid pattern;
// every result must leave with valid_out exactly 6 + 1 + 6 = 13 cycles
// later and equal sum_i conj(u_i) v_i computed here; valid_out must never
// rise without a matching valid_in.
module tb_inner_product;
  localparam int N = 57, UW = 24, VW = 16, L = 6, LAT = 13, NT = 300;
  localparam int YW = UW + VW + 2 + L;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0, cyc = 0;
  logic signed [UW-1:0] u_re [N], u_im [N];
  logic signed [VW-1:0] v_re [N], v_im [N];
  logic valid_in;
  logic signed [YW-1:0] y_re, y_im;
  logic valid_out;
  longint er [NT + LAT + 2], ei [NT + LAT + 2];
  bit     ev [NT + LAT + 2];

  inner_product #(.N(N), .UW(UW), .VW(VW)) dut (.*);

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
    valid_in = 0;
    foreach (u_re[i]) begin u_re[i] = 0; u_im[i] = 0; v_re[i] = 0; v_im[i] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT + LAT; t++) begin
      @(negedge clk);
      if (t < NT) begin
        er[t] = 0; ei[t] = 0;
        valid_in = ($urandom % 4) != 0;
        ev[t] = valid_in;
        for (int i = 0; i < N; i++) begin
          u_re[i] = UW'($urandom); u_im[i] = UW'($urandom);
          v_re[i] = VW'($urandom); v_im[i] = VW'($urandom);
          if (t == 0) begin u_re[i] = {1'b1, {(UW-1){1'b0}}}; u_im[i] = u_re[i];
                            v_re[i] = {1'b1, {(VW-1){1'b0}}}; v_im[i] = {1'b0, {(VW-1){1'b1}}}; end
          // conj(u) * v
          er[t] += longint'(u_re[i]) * longint'(v_re[i]) + longint'(u_im[i]) * longint'(v_im[i]);
          ei[t] += longint'(u_re[i]) * longint'(v_im[i]) - longint'(u_im[i]) * longint'(v_re[i]);
        end
      end else valid_in = 0;
      @(posedge clk); #1;
      if (t - LAT + 1 >= 0 && t - LAT + 1 < NT) begin
        int s;
        s = t - LAT + 1;
        checks++;
        if (valid_out !== ev[s]) begin
          failures++;
          if (failures < 5) $display("valid mismatch at %0d", s);
        end
        if (ev[s]) begin
          checks++;
          if (longint'(y_re) != er[s] || longint'(y_im) != ei[s]) begin
            failures++;
            if (failures < 5) $display("value mismatch at %0d: %0d %0d exp %0d %0d", s, y_re, y_im, er[s], ei[s]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
