// tb_cplx_mult: self-checking test of cplx_mult. Random and extreme
// operands enter every cycle; each result is compared with the complex
// product computed in the testbench exactly 6 cycles after its operands.
module tb_cplx_mult;
  localparam int AW = 16, BW = 17, LAT = 6, NT = 400;
  logic clk = 0, rst = 1;
  logic signed [AW-1:0] ar, ai;
  logic signed [BW-1:0] br, bi;
  logic signed [AW+BW:0] yr, yi;
  int checks = 0, failures = 0;
  longint exp_re [NT + LAT + 1];
  longint exp_im [NT + LAT + 1];

  cplx_mult #(.AW(AW), .BW(BW)) dut (.clk, .rst, .z1_re(ar), .z1_im(ai), .z2_re(br), .z2_im(bi),
                                      .y_re(yr), .y_im(yi));
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ar = 0; ai = 0; br = 0; bi = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT + LAT; t++) begin
      @(negedge clk);
      if (t < NT) begin
        if (t < 4) begin
          ar = (t & 1) ? 16'sh8000 : 16'sh7fff; ai = (t & 2) ? 16'sh8000 : 16'sh7fff;
          br = (t & 1) ? 17'sh10000 : 17'sh0ffff; bi = (t & 2) ? 17'sh0ffff : 17'sh10000;
        end else begin
          ar = AW'($urandom); ai = AW'($urandom); br = BW'($urandom); bi = BW'($urandom);
        end
        exp_re[t] = longint'(ar) * longint'(br) - longint'(ai) * longint'(bi);
        exp_im[t] = longint'(ar) * longint'(bi) + longint'(ai) * longint'(br);
      end
      @(posedge clk); #1;
      // result of operand t-LAT+1 visible now (6 register stages)
      if (t - LAT + 1 >= 0 && t - LAT + 1 < NT) begin
        checks++;
        if (longint'(yr) != exp_re[t-LAT+1] || longint'(yi) != exp_im[t-LAT+1]) begin
          failures++;
          if (failures < 5) $display("mismatch t=%0d got %0d,%0d exp %0d,%0d", t, yr, yi,
                                     exp_re[t-LAT+1], exp_im[t-LAT+1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
