// tb_concat1d_layer: checks concat1d_layer on random maps with different
// number formats on the two inputs (as at the second skip join) against the
// reference model, and checks the run time.
module tb_concat1d_layer;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int LEN = 30, CA = 6, CB = 4;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [FA_W-1:0] a_addr, b_addr, dst_addr;
  act_t a_data, b_data, dst_data;
  logic dst_we;
  int checks = 0, failures = 0;
  int sa [LEN*CA];
  int sb [LEN*CB];
  int got [LEN*(CA+CB)];
  iarr_t xa, xb, expv;

  always #5 clk = ~clk;

  concat1d_layer #(.LEN(LEN), .CA(CA), .CB(CB), .A_FRAC(6), .B_FRAC(7), .OUT_FRAC(6)) dut (.*);

  always_ff @(posedge clk) begin
    a_data <= act_t'(sa[a_addr]);
    b_data <= act_t'(sb[b_addr]);
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
    xa = new[LEN*CA];
    xb = new[LEN*CB];
    foreach (xa[i]) begin xa[i] = $signed(16'($urandom)) / scale; sa[i] = xa[i]; end
    foreach (xb[i]) begin xb[i] = $signed(16'($urandom)) / scale; sb[i] = xb[i]; end
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != LEN * (CA + CB) + 3) begin
      failures++; $display("latency %0d, expected %0d", cyc, LEN * (CA + CB) + 3);
    end
    @(posedge clk);
    expv = concat(xa, xb, LEN, CA, CB, 6, 7, 6);
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
