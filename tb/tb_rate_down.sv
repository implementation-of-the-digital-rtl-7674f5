// tb_rate_down: self-checking test of rate_down. A tick comes every 87
// cycles; single-cycle results arrive at random phases. dout may change
// and valid_out may pulse only in the cycle after a tick, and then must
// carry the latest result that arrived since the previous tick.
module tb_rate_down;
  localparam int RATE = 87, DW = 16, NC = 87 * 60;
  logic clk = 0, rst = 1, tick = 0, valid_in = 0, valid_out;
  logic [DW-1:0] din, dout;
  int checks = 0, failures = 0, cyc = 0, nval = 0;
  logic [DW-1:0] latest, shown;
  bit pend, exp_valid;

  rate_down #(.DW(DW)) dut (.*);

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
    din = '0; shown = '0; pend = 0; exp_valid = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      checks++;
      if (valid_out != exp_valid || dout != shown) begin
        failures++;
        if (failures < 5) $display("cycle %0d: dout %h exp %h, valid %b exp %b", c, dout, shown, valid_out, exp_valid);
      end
      if (valid_out) nval++;
      tick = (c % RATE) == 0;
      valid_in = ($urandom % 150) == 0;
      din = DW'($urandom);
      if (valid_in) begin latest = din; pend = 1; end
      exp_valid = 0;
      if (tick) begin
        if (pend) begin shown = latest; exp_valid = 1; end
        pend = 0;
      end
    end
    checks++;
    if (nval == 0) begin failures++; $display("no result passed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
