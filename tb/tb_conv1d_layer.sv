// tb_conv1d_layer: checks conv1d_layer against the reference model.
// A strided layer with several input channels is loaded with random weights
// and biases, fed random maps (large values, so saturation and ReLU both
// occur) and every output word and the run time are compared.
module tb_conv1d_layer;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int IN_LEN = 21, CIN = 3, COUT = 5, STRIDE = 2, FI = 7, FO = 6;
  localparam int OUT_LEN = (IN_LEN - 2) / STRIDE + 1;
  localparam int NPRM = 2 * CIN * COUT + COUT;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [FA_W-1:0] src_addr, dst_addr;
  act_t src_data, dst_data;
  logic dst_we, prm_we = 0;
  logic [PRM_AW-1:0] prm_addr = '0;
  logic [7:0] prm_data = '0;
  int checks = 0, failures = 0;
  int src [IN_LEN*CIN];
  int got [OUT_LEN*COUT];
  iarr_t x, prm, expv;

  always #5 clk = ~clk;

  conv1d_layer #(.IN_LEN(IN_LEN), .CIN(CIN), .COUT(COUT), .STRIDE(STRIDE),
                 .IN_FRAC(FI), .OUT_FRAC(FO)) dut (.*);

  always_ff @(posedge clk) begin
    src_data <= act_t'(src[src_addr]);
    if (dst_we) got[dst_addr] <= int'(dst_data);
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int scale);
    int cyc;
    prm = new[NPRM];
    x = new[IN_LEN*CIN];
    foreach (prm[i]) prm[i] = $signed(8'($urandom));
    foreach (x[i]) begin x[i] = $signed(16'($urandom)) / scale; src[i] = x[i]; end
    for (int i = 0; i < NPRM; i++) begin
      @(posedge clk); prm_we <= 1; prm_addr <= PRM_AW'(i); prm_data <= 8'(prm[i]);
    end
    @(posedge clk); prm_we <= 0; start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != OUT_LEN * (2 * CIN + COUT + 1) + 2) begin
      failures++; $display("latency %0d, expected %0d", cyc, OUT_LEN * (2 * CIN + COUT + 1) + 2);
    end
    @(posedge clk);
    expv = conv(x, IN_LEN, CIN, COUT, STRIDE, prm, 0, FI, FO);
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
    run_case(1);      // full-range inputs: saturation
    run_case(64);     // small inputs
    run_case(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
