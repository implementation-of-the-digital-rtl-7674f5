// tb_rate_up: self-checking test of rate_up with RATE = 87. tick must be
// high exactly once every 87 cycles; data present at a tick must appear on
// dout the next cycle and stay for 87 cycles; valid and restart must give
// one-cycle pulses only after ticks at which they were high.
module tb_rate_up;
  localparam int RATE = 87, DW = 16, NS = 40;
  logic clk = 0, rst = 1;
  logic [DW-1:0] din, dout;
  logic valid_in = 0, restart_in = 0, valid_out, restart_out, tick;
  int checks = 0, failures = 0, cyc = 0, nticks = 0, last_tick = -1;
  logic [DW-1:0] held;
  bit v_at_tick, r_at_tick, after_tick;

  rate_up #(.RATE(RATE), .DW(DW)) dut (.*);

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
    din = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < NS * RATE; c++) begin
      @(negedge clk);
      // outputs of the previous cycle's decision
      if (after_tick) begin
        checks++;
        if (dout != held || valid_out != v_at_tick || restart_out != r_at_tick) begin
          failures++;
          if (failures < 5) $display("cycle %0d: dout %h exp %h valid %b exp %b", c, dout, held, valid_out, v_at_tick);
        end
      end else if (c > 0) begin
        checks++;
        if (valid_out || restart_out || (nticks > 0 && dout != held)) begin
          failures++;
          if (failures < 5) $display("cycle %0d: pulse or change between ticks", c);
        end
      end
      // new random inputs every cycle; only those at a tick count
      din = DW'($urandom);
      valid_in = $urandom % 2;
      restart_in = ($urandom % 5) == 0;
      #1;
      after_tick = tick;
      if (tick) begin
        nticks++;
        if (last_tick >= 0) begin
          checks++;
          if (c - last_tick != RATE) begin failures++; $display("tick spacing %0d", c - last_tick); end
        end
        last_tick = c;
        held = din; v_at_tick = valid_in; r_at_tick = restart_in;
      end
    end
    checks++;
    if (nticks != NS) begin failures++; $display("%0d ticks", nticks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
