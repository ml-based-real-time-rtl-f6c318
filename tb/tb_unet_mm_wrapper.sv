// tb_unet_mm_wrapper: checks the memory-mapped wrapper with a stand-in core.
// The input and output buffers are modelled here with random wait states
// and, for reads, a random latency of 1 to 3 cycles (responses in order).
// The stand-in core records the words written into its input map and, after
// a random delay, returns result j = (input[j mod N_IN] xor j). Checked: every
// input word reaches the core at the right address, every result lands in
// the output buffer at the right address, one done pulse per frame, busy
// over the whole frame, and that stalls actually happened.
module tb_unet_mm_wrapper;
  import unet_pkg::*;

  localparam int NI = 260, NO = 520;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  avmm_req_t in_req, out_req;
  avmm_rsp_t in_rsp, out_rsp;
  logic core_start, core_done, core_in_we;
  logic [FA_W-1:0] core_in_addr, core_res_addr;
  act_t core_in_data, core_res_data;
  int checks = 0, failures = 0, stalls = 0, done_cnt = 0;

  always #5 clk = ~clk;

  unet_mm_wrapper #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  // ---- input buffer model: random waitrequest, 1..3 cycle read latency
  logic [15:0] inbuf [NI];
  logic [15:0] outbuf [NO];
  int          outwr [NO];
  logic in_wait, out_wait;
  int   q_due [$];
  logic [15:0] q_dat [$];
  int   now = 0;
  always_ff @(posedge clk) now <= now + 1;

  always_comb begin
    in_rsp = '0;
    in_rsp.waitrequest = in_wait;
    if (q_due.size() > 0 && q_due[0] <= now) begin
      in_rsp.readdatavalid = 1'b1;
      in_rsp.readdata      = {16'h0, q_dat[0]};
    end
    out_rsp = '0;
    out_rsp.waitrequest = out_wait;
  end

  always @(posedge clk) begin
    int due;
    if (in_rsp.readdatavalid) begin void'(q_due.pop_front()); void'(q_dat.pop_front()); end
    if (in_req.read && !in_wait) begin
      due = now + 1 + $urandom_range(0, 2);
      if (q_due.size() > 0 && q_due[$] > due) due = q_due[$];
      q_due.push_back(due);
      q_dat.push_back(inbuf[in_req.address]);
    end
    if ((in_req.read && in_wait) || (out_req.write && out_wait)) stalls++;
    if (out_req.write && !out_wait) begin
      outbuf[out_req.address] <= out_req.writedata[15:0];
      outwr[out_req.address]++;
    end
    in_wait  <= ($urandom_range(0, 3) == 0);
    out_wait <= ($urandom_range(0, 3) == 0);
    if (done) done_cnt++;
  end

  // ---- stand-in core
  logic [15:0] core_map [NI];
  int delay;
  always @(posedge clk) begin
    core_done <= 1'b0;
    if (core_in_we) core_map[core_in_addr] <= core_in_data;
    if (core_start) delay = $urandom_range(1, 50);
    else if (delay > 0) begin delay--; if (delay == 0) core_done <= 1'b1; end
    core_res_data <= act_t'(core_map[core_res_addr % NI] ^ 16'(core_res_addr));
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame();
    int busy_gaps = 0;
    foreach (inbuf[i]) inbuf[i] = 16'($urandom);
    foreach (outwr[i]) outwr[i] = 0;
    done_cnt = 0;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    while (!done) begin
      @(posedge clk);
      if (!busy && !done) busy_gaps++;
    end
    @(posedge clk);
    checks++; if (busy_gaps != 0) begin failures++; $display("busy dropped during frame"); end
    checks++; if (busy) begin failures++; $display("busy after done"); end
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (core_map[i] != inbuf[i]) begin failures++; if (failures < 10) $display("in %0d wrong", i); end
    end
    for (int j = 0; j < NO; j++) begin
      checks++;
      if (outbuf[j] != (inbuf[j % NI] ^ 16'(j)) || outwr[j] != 1) begin
        failures++;
        if (failures < 10) $display("out %0d = %h (%0d writes)", j, outbuf[j], outwr[j]);
      end
    end
    repeat (5) @(posedge clk);
    checks++; if (done_cnt != 1) begin failures++; $display("%0d done pulses", done_cnt); end
  endtask

  initial begin
    in_wait = 0; out_wait = 0; delay = 0; core_done = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    frame();
    frame();
    checks++;
    if (stalls == 0) begin failures++; $display("no wait states exercised"); end
    $display("wait-state cycles seen: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
