// tb_unet_core: runs the whole U-Net core at its published size (260 in,
// 520 out, 134,434 parameters plus the sigmoid table) and compares all 520
// results with the reference model. Two parameter sets are used: one drawn
// uniformly from [0, 1) as in a randomised bring-up model, one signed. The
// sigmoid table is the real sigmoid. The run time of each frame is checked
// against the sum of the layer latencies, and five intermediate maps (both
// skip maps, both concatenations, the flattened map) are compared too.
module tb_unet_core;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, done, busy;
  logic in_we = 0;
  logic [FA_W-1:0] in_addr = '0, res_addr = '0;
  act_t in_data = '0, res_data;
  prm_wr_t prm = '0;
  int checks = 0, failures = 0;
  iarr_t x, p, expv;

  always #5 clk = ~clk;

  unet_core dut (.*);

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // layer latencies (see each layer module) plus one sequencer cycle per layer
  function automatic int conv_lat(int olen, int cin, int cout);
    return olen * (2 * cin + cout + 1) + 2;
  endfunction
  localparam int EXP_LAT =
      (260 + 3) + conv_lat(259, 1, 4) + conv_lat(258, 4, 4) + (3 * 129 * 4 + 2)
    + conv_lat(128, 4, 6) + conv_lat(127, 6, 6) + (3 * 63 * 6 + 2)
    + conv_lat(62, 6, 8) + conv_lat(61, 8, 8) + (122 * 8 + 3) + (127 * 8 + 3) + (127 * 14 + 3)
    + conv_lat(126, 14, 6) + conv_lat(125, 6, 6) + (250 * 6 + 3) + (258 * 6 + 3) + (258 * 10 + 3)
    + conv_lat(129, 10, 4) + conv_lat(64, 4, 4) + (256 + 260 + 3);

  // intermediate maps: both skip maps, both concatenations, the flattened map
  task automatic cmp_map(input string name, input iarr_t e, input int k);
    int bad = 0;
    foreach (e[i]) begin
      int g;
      case (k)
        3:  g = int'(dut.g_map[3].u_map.mem[i]);
        6:  g = int'(dut.g_map[6].u_map.mem[i]);
        12: g = int'(dut.g_map[12].u_map.mem[i]);
        17: g = int'(dut.g_map[17].u_map.mem[i]);
        default: g = int'(dut.g_map[19].u_map.mem[i]);
      endcase
      checks++;
      if (g != e[i]) begin bad++; failures++; end
    end
    if (bad > 0) $display("map %s: %0d words differ", name, bad);
  endtask

  task automatic check_maps(input iarr_t x, input iarr_t p);
    iarr_t bn, c1, c2, p1, c3, c4, p2, c5, c6, u1, z1, k1, c7, c8, u2, z2, k2, c9, c10;
    bn  = bnorm(x, p, PB_BN, 9, 9);
    c1  = conv(bn, 260, 1, 4, 1, p, PB_C1, 9, 8);
    c2  = conv(c1, 259, 4, 4, 1, p, PB_C2, 8, 7);
    p1  = pool(c2, 258, 4, 7, 7);
    c3  = conv(p1, 129, 4, 6, 1, p, PB_C3, 7, 7);
    c4  = conv(c3, 128, 6, 6, 1, p, PB_C4, 7, 7);
    p2  = pool(c4, 127, 6, 7, 7);
    c5  = conv(p2, 63, 6, 8, 1, p, PB_C5, 7, 7);
    c6  = conv(c5, 62, 8, 8, 1, p, PB_C6, 7, 7);
    u1  = upsample(c6, 61, 8, 7, 7);
    z1  = zeropad(u1, 122, 8, 2, 3, 7, 7);
    k1  = concat(z1, c4, 127, 8, 6, 7, 7, 7);
    c7  = conv(k1, 127, 14, 6, 1, p, PB_C7, 7, 7);
    c8  = conv(c7, 126, 6, 6, 1, p, PB_C8, 7, 6);
    u2  = upsample(c8, 125, 6, 6, 6);
    z2  = zeropad(u2, 250, 6, 4, 4, 6, 6);
    k2  = concat(z2, c2, 258, 6, 4, 6, 7, 6);
    c9  = conv(k2, 258, 10, 4, 2, p, PB_C9, 6, 6);
    c10 = conv(c9, 129, 4, 4, 2, p, PB_C10, 6, 9);
    cmp_map("skip S1", c2, 3);
    cmp_map("skip S2", c4, 6);
    cmp_map("concat 1", k1, 12);
    cmp_map("concat 2", k2, 17);
    cmp_map("flatten", c10, 19);
  endtask

  task automatic run_case(input bit unit_range);
    int cyc, nz;
    p = new[N_PRM];
    x = new[260];
    for (int i = 0; i < N_PRM; i++)
      if (i >= PB_D + 256 * 520 + 520)     p[i] = sig_entry(i - (PB_D + 256 * 520 + 520), 1024);
      else if (unit_range)                 p[i] = $urandom_range(0, 31);   // [0,1) in ac_fixed<8,3>
      else                                 p[i] = int'($urandom_range(0, 80)) - 40;
    foreach (x[i]) x[i] = int'($urandom_range(0, 2047)) - 1024;             // +-2.0
    for (int i = 0; i < N_PRM; i++) begin
      @(posedge clk); prm <= '{we: 1'b1, addr: PRM_AW'(i), data: 8'(p[i])};
    end
    for (int i = 0; i < 260; i++) begin
      @(posedge clk); prm.we <= 1'b0; in_we <= 1; in_addr <= FA_W'(i); in_data <= act_t'(x[i]);
    end
    @(posedge clk); in_we <= 0; start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != EXP_LAT + 2) begin
      failures++; $display("latency %0d, expected %0d", cyc, EXP_LAT + 2);
    end
    $display("core latency %0d cycles", cyc);
    expv = unet(x, p);
    nz = 0;
    for (int o = 0; o < 520; o++) begin
      @(posedge clk) res_addr <= FA_W'(o);
      @(posedge clk);
      #1;
      checks++;
      if (expv[o] != 0 && expv[o] != 1020) nz++;
      if (int'(res_data) != expv[o]) begin
        failures++;
        if (failures < 10) $display("res[%0d] = %0d, expected %0d", o, res_data, expv[o]);
      end
    end
    $display("%0d of 520 results strictly between 0 and 1", nz);
    check_maps(x, p);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_case(1'b1);
    run_case(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
