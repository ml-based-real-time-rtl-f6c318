// tb_deblend_node_top: end-to-end test of the FPGA side of the central node
// at its full size, with the processor modelled by bus tasks.
//
// The processor model loads all 134,434 network parameters and the sigmoid
// table through the parameter window, then runs frames as the software
// would: write 260 samples into the input buffer, write GO, wait for the
// interrupt (or poll STATUS with the interrupt disabled), read the latency
// counter, read the 520 results from the output buffer, acknowledge. Every
// result is compared with the reference model; the latency register is
// compared with the cycle count seen here and with the 3 ms budget at
// 100 MHz. Each mechanism is counted and must occur: frame written, IP
// started, IP read of the input buffer, IP write of the output buffer,
// interrupt, polled completion, GO ignored while busy, read-back.
module tb_deblend_node_top;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [18:0] hps_address = '0;
  logic        hps_read = 0, hps_write = 0;
  logic [31:0] hps_writedata = '0, hps_readdata;
  logic        hps_readdatavalid, irq;
  int checks = 0, failures = 0;
  int n_frames_written = 0, n_ip_starts = 0, n_ip_reads = 0, n_ip_writes = 0,
      n_irq = 0, n_polled = 0, n_go_ignored = 0, n_readback = 0;
  iarr_t p, x, expv;

  always #5 clk = ~clk;

  deblend_node_top dut (.*);

  // observe the internal handshakes the test has to reach
  always @(posedge clk) begin
    if (dut.ip_start && rst_n) n_ip_starts++;
    if (dut.in_b_req.read && rst_n) n_ip_reads++;
    if (dut.out_b_req.write && !dut.out_b_rsp.waitrequest && rst_n) n_ip_writes++;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus_wr(input int a, input logic [31:0] d);
    @(posedge clk);
    hps_address <= 19'(a); hps_write <= 1; hps_writedata <= d;
    @(posedge clk);
    hps_write <= 0;
  endtask

  task automatic bus_rd(input int a, output logic [31:0] d);
    @(posedge clk);
    hps_address <= 19'(a); hps_read <= 1;
    @(posedge clk);
    hps_read <= 0;
    #1;
    if (!hps_readdatavalid) begin failures++; $display("read of %h: no data", a); end
    d = hps_readdata;
  endtask

  task automatic check(input string what, input int got, input int expv);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 12) $display("%s = %0d, expected %0d", what, got, expv);
    end
  endtask

  task automatic frame(input bit use_irq, input bit try_second_go);
    logic [31:0] d;
    int cyc, lat;
    x = new[260];
    foreach (x[i]) x[i] = int'($urandom_range(0, 4095)) - 2048;   // +-4.0 in ac_fixed<16,7>
    for (int a = 0; a < 130; a++) bus_wr(a, {16'(x[2*a+1]), 16'(x[2*a])});
    n_frames_written++;
    bus_wr(32'h400, {30'd0, use_irq, 1'b1});                       // GO
    cyc = 2;
    if (try_second_go) begin
      bus_wr(32'h400, {30'd0, use_irq, 1'b1});
      cyc += 2;
    end
    if (use_irq) begin
      while (!irq) begin @(posedge clk); cyc++; end
      n_irq++;
    end else begin
      do begin bus_rd(32'h401, d); cyc += 2; end while (!d[1]);
      n_polled++;
      check("irq stays low when disabled", int'(irq), 0);
    end
    bus_rd(32'h402, d);
    lat = int'(d);
    $display("frame: IP latency %0d cycles (%0.3f ms at 100 MHz)", lat, real'(lat) / 1.0e5);
    checks++;
    if (lat < cyc - 6 || lat > cyc) begin
      failures++; $display("latency register %0d, observed about %0d", lat, cyc);
    end
    checks++;
    if (lat >= 300000) begin failures++; $display("3 ms budget exceeded"); end
    expv = unet(x, p);
    for (int a = 0; a < 260; a++) begin
      bus_rd(32'h200 + a, d);
      check($sformatf("result %0d", 2*a), int'($signed(d[15:0])), expv[2*a]);
      check($sformatf("result %0d", 2*a+1), int'($signed(d[31:16])), expv[2*a+1]);
    end
    n_readback++;
    bus_wr(32'h401, 32'h2);                                         // acknowledge
    bus_rd(32'h401, d);
    check("STATUS after ack", int'(d[1:0]), 0);
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    p = new[N_PRM];
    for (int i = 0; i < N_PRM; i++)
      if (i >= PB_D + 256 * 520 + 520) p[i] = sig_entry(i - (PB_D + 256 * 520 + 520), 1024);
      else                             p[i] = int'($urandom_range(0, 40)) - 20;
    for (int i = 0; i < N_PRM; i++) begin
      @(posedge clk);
      hps_address <= 19'(32'h40000 + i); hps_write <= 1; hps_writedata <= 32'(p[i] & 255);
    end
    @(posedge clk); hps_write <= 0;
    frame(1'b1, 1'b0);
    frame(1'b1, 1'b1);
    frame(1'b0, 1'b0);
    n_go_ignored = 4 - n_ip_starts;                 // four GO writes, three frames
    bus_rd(32'h404, d); check("FRAMES register", int'(d), 3);
    check("IP starts", n_ip_starts, 3);
    check("IP input reads", n_ip_reads, 3 * 260);
    check("IP output writes", n_ip_writes, 3 * 520);
    checks++; if (n_frames_written == 0) failures++;
    checks++; if (n_irq == 0) begin failures++; $display("interrupt never used"); end
    checks++; if (n_polled == 0) begin failures++; $display("polling never used"); end
    checks++; if (n_go_ignored == 0) begin failures++; $display("GO while busy never ignored"); end
    checks++; if (n_readback == 0) failures++;
    $display("frames %0d, IP starts %0d, IP reads %0d, IP writes %0d, irq %0d, polled %0d, GO ignored %0d, read-backs %0d",
             n_frames_written, n_ip_starts, n_ip_reads, n_ip_writes, n_irq, n_polled, n_go_ignored, n_readback);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
