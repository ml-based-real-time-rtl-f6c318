// tb_maxpool1d_layer: checks maxpool1d_layer on random maps against the reference model
// (every output word, with a change of number format where the layer has
// one) and checks the run time.
module tb_maxpool1d_layer;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int LEN = 27, CH = 3, NSRC = LEN*CH, NDST = (LEN/2)*CH;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [FA_W-1:0] src_addr, dst_addr;
  act_t src_data, dst_data;
  logic dst_we;
  int checks = 0, failures = 0;
  int src [NSRC];
  int got [NDST];
  iarr_t x, expv;

  always #5 clk = ~clk;

  maxpool1d_layer #(.IN_LEN(LEN), .CH(CH), .IN_FRAC(7), .OUT_FRAC(6)) dut (.*);

  always_ff @(posedge clk) begin
    src_data <= act_t'(src[src_addr]);
    if (dst_we) got[dst_addr] <= int'(dst_data);
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int scale);
    int cyc;
    x = new[NSRC];
    foreach (x[i]) begin x[i] = $signed(16'($urandom)) / scale; src[i] = x[i]; end
    foreach (got[i]) got[i] = 12345;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != 3*(LEN/2)*CH+2) begin failures++; $display("latency %0d, expected %0d", cyc, 3*(LEN/2)*CH+2); end
    @(posedge clk);
    expv = pool(x, LEN, CH, 7, 6);
    foreach (expv[i]) begin
      checks++;
      if (got[i] != expv[i]) begin
        failures++;
        if (failures < 10) $display("out[%0d] = %0d, expected %0d", i, got[i], expv[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_case(1);
    run_case(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
