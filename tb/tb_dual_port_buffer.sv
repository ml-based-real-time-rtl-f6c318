// tb_dual_port_buffer: writes random samples through one port and reads them
// back through the other, both ways, checking the packing of two 16-bit
// samples per 32-bit word (sample 2a low, 2a+1 high), the one-cycle read
// latency and that out-of-range reads return 0.
module tb_dual_port_buffer;
  import unet_pkg::*;

  localparam int D = 520;

  logic clk = 0, rst_n = 0;
  avmm_req_t a_req = '0, b_req = '0;
  avmm_rsp_t a_rsp, b_rsp;
  int checks = 0, failures = 0;
  logic [15:0] model [D];

  always #5 clk = ~clk;

  dual_port_buffer #(.DEPTH16(D)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] expv);
    checks++;
    if (got !== expv) begin
      failures++;
      if (failures < 10) $display("%s = %h, expected %h", what, got, expv);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // processor side writes, IP side reads
    for (int a = 0; a < D / 2; a++) begin
      model[2*a] = 16'($urandom); model[2*a+1] = 16'($urandom);
      @(posedge clk);
      a_req <= '{address: 16'(a), read: 1'b0, write: 1'b1, writedata: {model[2*a+1], model[2*a]}};
    end
    @(posedge clk); a_req <= '0;
    for (int i = 0; i < D; i++) begin
      @(posedge clk); b_req <= '{address: 16'(i), read: 1'b1, write: 1'b0, writedata: '0};
      @(posedge clk); b_req <= '0;
      #1;
      check("valid", 32'(b_rsp.readdatavalid), 1);
      check($sformatf("b[%0d]", i), b_rsp.readdata, {16'h0, model[i]});
    end
    // IP side writes, processor side reads
    for (int i = 0; i < D; i++) begin
      model[i] = 16'($urandom);
      @(posedge clk); b_req <= '{address: 16'(i), read: 1'b0, write: 1'b1, writedata: {16'h0, model[i]}};
    end
    @(posedge clk); b_req <= '0;
    for (int a = 0; a < D / 2; a++) begin
      @(posedge clk); a_req <= '{address: 16'(a), read: 1'b1, write: 1'b0, writedata: '0};
      @(posedge clk); a_req <= '0;
      #1;
      check("valid", 32'(a_rsp.readdatavalid), 1);
      check($sformatf("a[%0d]", a), a_rsp.readdata, {model[2*a+1], model[2*a]});
    end
    @(posedge clk); a_req <= '{address: 16'(D), read: 1'b1, write: 1'b0, writedata: '0};
    @(posedge clk); a_req <= '0; #1;
    check("out of range", a_rsp.readdata, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
