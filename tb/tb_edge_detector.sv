// tb_edge_detector: self-checking test of the start-pulse edge detector.
//
// A random level sequence is applied; every cycle the pulse is compared with
// a model (one cycle high in the cycle after a 0 -> 1 change of the level,
// as seen two samples back). Also checks a held-high level gives one pulse.
module tb_edge_detector;
  logic clk = 0, rst_n = 1, level = 0, pulse;
  int checks = 0, failures = 0, npulse = 0;
  bit h1 = 0, h2 = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  edge_detector dut (.clk, .rst_n, .level, .pulse);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int bad = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      level = $urandom_range(0, 1);
      @(posedge clk); h2 = h1; h1 = level;
      @(negedge clk);
      if (pulse != (h1 && !h2)) bad++;
    end
    check(bad == 0, $sformatf("%0d cycles with the wrong pulse", bad));
    level = 0; repeat (3) @(negedge clk);
    level = 1;
    repeat (10) begin @(negedge clk); npulse += pulse; end
    check(npulse == 1, $sformatf("held level gave %0d pulses", npulse));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
