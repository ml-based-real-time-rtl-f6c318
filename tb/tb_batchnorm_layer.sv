// tb_batchnorm_layer: checks batchnorm_layer (folded scale and shift) on
// random frames against the reference model, including saturating cases,
// and checks the run time.
module tb_batchnorm_layer;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int LEN = 260;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [FA_W-1:0] src_addr, dst_addr;
  act_t src_data, dst_data;
  logic dst_we, prm_we = 0;
  logic [PRM_AW-1:0] prm_addr = '0;
  logic [7:0] prm_data = '0;
  int checks = 0, failures = 0;
  int src [LEN];
  int got [LEN];
  iarr_t x, prm, expv;

  always #5 clk = ~clk;

  batchnorm_layer #(.LEN(LEN), .CH(1), .IN_FRAC(9), .OUT_FRAC(9)) dut (.*);

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
    prm = new[2];
    x = new[LEN];
    foreach (prm[i]) prm[i] = $signed(8'($urandom));
    foreach (x[i]) begin x[i] = $signed(16'($urandom)) / scale; src[i] = x[i]; end
    for (int i = 0; i < 2; i++) begin
      @(posedge clk); prm_we <= 1; prm_addr <= PRM_AW'(i); prm_data <= 8'(prm[i]);
    end
    @(posedge clk); prm_we <= 0; start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != LEN + 3) begin failures++; $display("latency %0d, expected %0d", cyc, LEN + 3); end
    @(posedge clk);
    expv = bnorm(x, prm, 0, 9, 9);
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
