// tb_perf_counter: drives start/done pairs with random gaps and checks the
// last and largest latency and the frame count against counts kept here;
// also checks that a start during a measurement is ignored and that clear
// zeroes everything.
module tb_perf_counter;
  logic clk = 0, rst_n = 0, clear = 0, start = 0, done = 0;
  logic [31:0] last_cycles, max_cycles, frames;
  int checks = 0, failures = 0;
  int exp_max = 0;

  always #5 clk = ~clk;

  perf_counter #(.W(32)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin failures++; $display("%s = %0d, expected %0d", what, got, expv); end
  endtask

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 1; f <= 20; f++) begin
      lat = $urandom_range(1, 300);
      @(posedge clk); start <= 1;
      @(posedge clk); start <= 0;
      for (int k = 1; k < lat; k++) begin
        @(posedge clk);
        if (k == 3) start <= 1;          // ignored: a measurement is running
        else start <= 0;
      end
      start <= 0; done <= 1;
      @(posedge clk); done <= 0;
      @(posedge clk);
      if (lat > exp_max) exp_max = lat;
      check("last", int'(last_cycles), lat);
      check("max", int'(max_cycles), exp_max);
      check("frames", int'(frames), f);
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    check("last after clear", int'(last_cycles), 0);
    check("frames after clear", int'(frames), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
