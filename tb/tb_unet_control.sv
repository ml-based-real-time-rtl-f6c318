// tb_unet_control: exercises the control block's register interface with a
// stand-in IP that raises busy for a random time and then pulses done.
// Checks: GO starts the IP exactly once, GO while busy is ignored, DONE and
// irq follow ip_done, irq obeys IRQ_EN, writing STATUS clears them, the
// counter registers read back the values on their inputs, PERF_CLR pulses.
module tb_unet_control;
  import unet_pkg::*;

  logic clk = 0, rst_n = 0;
  avmm_req_t csr_req = '0;
  avmm_rsp_t csr_rsp;
  logic ip_start, ip_busy = 0, ip_done = 0, irq, perf_clear;
  logic [31:0] lat_last = 32'h1234, lat_max = 32'h5678, frames = 32'h9;
  int checks = 0, failures = 0, starts = 0, clears = 0;

  always #5 clk = ~clk;

  unet_control dut (.*);

  // stand-in IP
  int busy_left = 0;
  always @(posedge clk) begin
    ip_done <= 1'b0;
    if (ip_start && rst_n) begin starts++; ip_busy <= 1'b1; busy_left = $urandom_range(5, 40); end
    else if (ip_busy) begin
      busy_left--;
      if (busy_left == 0) begin ip_busy <= 1'b0; ip_done <= 1'b1; end
    end
    if (perf_clear && rst_n) clears++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int off, input logic [31:0] d);
    @(posedge clk) csr_req <= '{address: 16'(off), read: 1'b0, write: 1'b1, writedata: d};
    @(posedge clk) csr_req <= '0;
  endtask

  task automatic rd(input int off, output logic [31:0] d);
    @(posedge clk) csr_req <= '{address: 16'(off), read: 1'b1, write: 1'b0, writedata: '0};
    @(posedge clk) csr_req <= '0;
    #1 d = csr_rsp.readdata;
    if (!csr_rsp.readdatavalid) begin failures++; $display("no readdatavalid"); end
  endtask

  task automatic check(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin failures++; $display("%s = %0d, expected %0d", what, got, expv); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 6; f++) begin
      bit en;
      en = f[0];
      wr(0, {30'd0, en, 1'b1});                // GO
      repeat (2) @(posedge clk);
      check("busy seen", int'(ip_busy), 1);
      wr(0, {30'd0, en, 1'b1});                // GO while busy: ignored
      rd(1, d);
      check("STATUS.busy", int'(d[0]), 1);
      check("irq while busy", int'(irq), 0);
      while (ip_busy) @(posedge clk);
      repeat (2) @(posedge clk);
      rd(1, d);
      check("STATUS.done", int'(d[1]), 1);
      check("irq", int'(irq), int'(en));
      wr(1, 32'h2);                            // acknowledge
      @(posedge clk);
      check("irq after ack", int'(irq), 0);
      rd(1, d);
      check("STATUS after ack", int'(d[1:0]), 0);
      check("starts", starts, f + 1);
    end
    rd(2, d); check("LAT_LAST", int'(d), 32'h1234);
    rd(3, d); check("LAT_MAX", int'(d), 32'h5678);
    rd(4, d); check("FRAMES", int'(d), 9);
    rd(0, d); check("CTRL.irq_en", int'(d[1]), 1);
    wr(5, 0); repeat (2) @(posedge clk);
    check("perf clear pulses", clears, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
