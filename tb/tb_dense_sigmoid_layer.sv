// tb_dense_sigmoid_layer: checks dense_sigmoid_layer with a reuse factor
// that does not divide the output count (3 outputs per cycle, one lane idle
// in the last cycle). Weights, biases and a table of random entries are
// loaded through the parameter port, so the table index is checked exactly;
// every result and the run time are compared with the reference model.
module tb_dense_sigmoid_layer;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int NI = 16, NO = 10, RF = 4, TBL = 64;
  localparam int NPRM = NI * NO + NO + TBL;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [FA_W-1:0] src_addr, res_addr = '0;
  act_t src_data, res_data;
  logic prm_we = 0;
  logic [PRM_AW-1:0] prm_addr = '0;
  logic [7:0] prm_data = '0;
  int checks = 0, failures = 0;
  int src [NI];
  iarr_t x, prm, expv;

  always #5 clk = ~clk;

  dense_sigmoid_layer #(.N_IN(NI), .N_OUT(NO), .RF(RF), .IN_FRAC(9), .OUT_FRAC(10), .TBL(TBL)) dut (.*);

  always_ff @(posedge clk) src_data <= act_t'(src[src_addr]);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int scale);
    int cyc;
    prm = new[NPRM];
    x = new[NI];
    foreach (prm[i]) prm[i] = (i < NI * NO + NO) ? $signed(8'($urandom)) : int'(8'($urandom));
    foreach (x[i]) begin x[i] = $signed(16'($urandom)) / scale; src[i] = x[i]; end
    for (int i = 0; i < NPRM; i++) begin
      @(posedge clk); prm_we <= 1; prm_addr <= PRM_AW'(i); prm_data <= 8'(prm[i]);
    end
    @(posedge clk); prm_we <= 0; start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != NI + RF + 3) begin failures++; $display("latency %0d, expected %0d", cyc, NI + RF + 3); end
    expv = dense(x, NI, NO, prm, 0, TBL, 9, 10);
    for (int o = 0; o < NO; o++) begin
      @(posedge clk) res_addr <= FA_W'(o);
      @(posedge clk);
      #1;
      checks++;
      if (int'(res_data) != expv[o]) begin
        failures++;
        if (failures < 10) $display("res[%0d] = %0d, expected %0d", o, res_data, expv[o]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_case(1);
    run_case(64);
    run_case(512);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
