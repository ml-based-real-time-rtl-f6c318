// unet_core: the beam-loss de-blending U-Net, 260 monitor readings in,
// 520 scores (an MI / RR pair per monitor) out.
//
// Network (shape after each layer, (length, channels), and its ac_fixed<16,x>):
//   input 260 (x=7) -> BatchNorm (260,1) x=7
//   Conv1D (259,4) x=8 -> Conv1D (258,4) x=9 = skip S1 -> MaxPool (129,4) x=9
//   Conv1D (128,6) x=9 -> Conv1D (127,6) x=9 = skip S2 -> MaxPool (63,6) x=9
//   Conv1D (62,8) x=9 -> Conv1D (61,8) x=9
//   UpSample (122,8) x=9 -> ZeroPad (127,8) x=9 -> Concat with S2 (127,14) x=9
//   Conv1D (126,6) x=9 -> Conv1D (125,6) x=10
//   UpSample (250,6) x=10 -> ZeroPad (258,6) x=10 -> Concat with S1 (258,10) x=10
//   Conv1D stride 2 (129,4) x=10 -> Conv1D stride 2 (64,4) x=7
//   Flatten (256) x=7 -> Dense + sigmoid (520) x=6
// All Conv1D layers have kernel 2 and ReLU. The parameter count of this
// network is 134,434 (Dense 133,640, convolutions 792, BatchNorm 2).
//
// Each layer is its own engine with its own output feature map (fmap_ram).
// A sequencer starts the layers one after another; each starts when the
// previous one pulses done. Flatten needs no hardware: the 64x4 map is
// already stored position-major, which is the flattened order.
//
// Interface: in_we/in_addr/in_data fill the input map; start (pulse) runs
// the network; done pulses when the 520 results can be read through
// res_addr/res_data (one cycle latency). prm writes load one 8-bit
// parameter at a global index (layer by layer in the order above; per layer
// as documented in each layer module; the sigmoid table follows the dense
// biases at index 134,434).
//
// Layer order, shapes, precisions, kernel size and activations follow the
// published network; layer-by-layer execution, the pad split, the pooling
// type and the parameter index map are this implementation's choices.
module unet_core (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      done,
  output logic                      busy,
  input  logic                      in_we,
  input  logic [unet_pkg::FA_W-1:0] in_addr,
  input  unet_pkg::act_t            in_data,
  input  logic [unet_pkg::FA_W-1:0] res_addr,
  output unet_pkg::act_t            res_data,
  input  unet_pkg::prm_wr_t         prm
);
  import unet_pkg::*;

  localparam int NL = 20;   // layers with hardware

  // parameter index bases (count per conv layer: 2*CIN*COUT + COUT)
  localparam int PB_BN  = 0;
  localparam int PB_C1  = PB_BN + 2;
  localparam int PB_C2  = PB_C1 + 2*1*4 + 4;
  localparam int PB_C3  = PB_C2 + 2*4*4 + 4;
  localparam int PB_C4  = PB_C3 + 2*4*6 + 6;
  localparam int PB_C5  = PB_C4 + 2*6*6 + 6;
  localparam int PB_C6  = PB_C5 + 2*6*8 + 8;
  localparam int PB_C7  = PB_C6 + 2*8*8 + 8;
  localparam int PB_C8  = PB_C7 + 2*14*6 + 6;
  localparam int PB_C9  = PB_C8 + 2*6*6 + 6;
  localparam int PB_C10 = PB_C9 + 2*10*4 + 4;
  localparam int PB_D   = PB_C10 + 2*4*4 + 4;
  localparam int PB_END = PB_D + 256*520 + 520 + SIG_TABLE_SIZE;

  function automatic logic in_rng(input logic [PRM_AW-1:0] a, input int lo, input int hi);
    return int'(a) >= lo && int'(a) < hi;
  endfunction

  // ---------------------------------------------------------------- sequencer
  logic [NL-1:0] lstart, ldone;
  logic [4:0]    stage;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; stage <= '0; lstart <= '0; done <= 1'b0;
    end else begin
      lstart <= '0;
      done   <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; stage <= '0; lstart <= NL'(1);
      end else if (busy && ldone[stage]) begin
        if (int'(stage) == NL - 1) begin
          busy <= 1'b0; done <= 1'b1;
        end else begin
          stage  <= stage + 1'b1;
          lstart <= NL'(1) << (stage + 1'b1);
        end
      end
    end
  end

  // ---------------------------------------------------------- feature maps
  // b[k]: map written by layer k-1 (b[0] is the input frame)
  localparam int NB = 20;
  localparam int DEPTH [NB] = '{260, 260, 1036, 1032, 516, 768, 762, 378, 496, 488,
                                976, 1016, 1778, 756, 750, 1500, 1548, 2580, 516, 256};
  logic            b_we    [NB];
  logic [FA_W-1:0] b_waddr [NB];
  act_t            b_wdata [NB];
  logic [FA_W-1:0] b_raddr [NB];
  act_t            b_rdata [NB];

  for (genvar k = 0; k < NB; k++) begin : g_map
    fmap_ram #(.DEPTH(DEPTH[k])) u_map (
      .clk, .we(b_we[k]), .waddr(b_waddr[k]), .wdata(b_wdata[k]),
      .raddr(b_raddr[k]), .rdata(b_rdata[k]));
  end

  assign b_we[0]    = in_we;
  assign b_waddr[0] = in_addr;
  assign b_wdata[0] = in_data;

  // read-address sources; the two skip maps are read by two layers
  logic [FA_W-1:0] rd_addr [NB];
  logic [FA_W-1:0] cat1_b_addr, cat2_b_addr;
  always_comb begin
    for (int k = 0; k < NB; k++) b_raddr[k] = rd_addr[k];
    if (stage == 5'd16) b_raddr[3] = cat2_b_addr;
    if (stage == 5'd11) b_raddr[6] = cat1_b_addr;
  end

  // ---------------------------------------------------------------- layers
  batchnorm_layer #(.LEN(260), .CH(1), .IN_FRAC(9), .OUT_FRAC(9)) u_bn (
    .clk, .rst_n, .start(lstart[0]), .done(ldone[0]),
    .src_addr(rd_addr[0]), .src_data(b_rdata[0]),
    .dst_we(b_we[1]), .dst_addr(b_waddr[1]), .dst_data(b_wdata[1]),
    .prm_we(prm.we && in_rng(prm.addr, PB_BN, PB_C1)),
    .prm_addr(prm.addr - PRM_AW'(PB_BN)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(260), .CIN(1), .COUT(4), .STRIDE(1), .IN_FRAC(9), .OUT_FRAC(8)) u_c1 (
    .clk, .rst_n, .start(lstart[1]), .done(ldone[1]),
    .src_addr(rd_addr[1]), .src_data(b_rdata[1]),
    .dst_we(b_we[2]), .dst_addr(b_waddr[2]), .dst_data(b_wdata[2]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C1, PB_C2)),
    .prm_addr(prm.addr - PRM_AW'(PB_C1)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(259), .CIN(4), .COUT(4), .STRIDE(1), .IN_FRAC(8), .OUT_FRAC(7)) u_c2 (
    .clk, .rst_n, .start(lstart[2]), .done(ldone[2]),
    .src_addr(rd_addr[2]), .src_data(b_rdata[2]),
    .dst_we(b_we[3]), .dst_addr(b_waddr[3]), .dst_data(b_wdata[3]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C2, PB_C3)),
    .prm_addr(prm.addr - PRM_AW'(PB_C2)), .prm_data(prm.data));

  maxpool1d_layer #(.IN_LEN(258), .CH(4), .IN_FRAC(7), .OUT_FRAC(7)) u_p1 (
    .clk, .rst_n, .start(lstart[3]), .done(ldone[3]),
    .src_addr(rd_addr[3]), .src_data(b_rdata[3]),
    .dst_we(b_we[4]), .dst_addr(b_waddr[4]), .dst_data(b_wdata[4]));

  conv1d_layer #(.IN_LEN(129), .CIN(4), .COUT(6), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(7)) u_c3 (
    .clk, .rst_n, .start(lstart[4]), .done(ldone[4]),
    .src_addr(rd_addr[4]), .src_data(b_rdata[4]),
    .dst_we(b_we[5]), .dst_addr(b_waddr[5]), .dst_data(b_wdata[5]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C3, PB_C4)),
    .prm_addr(prm.addr - PRM_AW'(PB_C3)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(128), .CIN(6), .COUT(6), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(7)) u_c4 (
    .clk, .rst_n, .start(lstart[5]), .done(ldone[5]),
    .src_addr(rd_addr[5]), .src_data(b_rdata[5]),
    .dst_we(b_we[6]), .dst_addr(b_waddr[6]), .dst_data(b_wdata[6]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C4, PB_C5)),
    .prm_addr(prm.addr - PRM_AW'(PB_C4)), .prm_data(prm.data));

  maxpool1d_layer #(.IN_LEN(127), .CH(6), .IN_FRAC(7), .OUT_FRAC(7)) u_p2 (
    .clk, .rst_n, .start(lstart[6]), .done(ldone[6]),
    .src_addr(rd_addr[6]), .src_data(b_rdata[6]),
    .dst_we(b_we[7]), .dst_addr(b_waddr[7]), .dst_data(b_wdata[7]));

  conv1d_layer #(.IN_LEN(63), .CIN(6), .COUT(8), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(7)) u_c5 (
    .clk, .rst_n, .start(lstart[7]), .done(ldone[7]),
    .src_addr(rd_addr[7]), .src_data(b_rdata[7]),
    .dst_we(b_we[8]), .dst_addr(b_waddr[8]), .dst_data(b_wdata[8]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C5, PB_C6)),
    .prm_addr(prm.addr - PRM_AW'(PB_C5)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(62), .CIN(8), .COUT(8), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(7)) u_c6 (
    .clk, .rst_n, .start(lstart[8]), .done(ldone[8]),
    .src_addr(rd_addr[8]), .src_data(b_rdata[8]),
    .dst_we(b_we[9]), .dst_addr(b_waddr[9]), .dst_data(b_wdata[9]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C6, PB_C7)),
    .prm_addr(prm.addr - PRM_AW'(PB_C6)), .prm_data(prm.data));

  upsample1d_layer #(.IN_LEN(61), .CH(8), .IN_FRAC(7), .OUT_FRAC(7)) u_up1 (
    .clk, .rst_n, .start(lstart[9]), .done(ldone[9]),
    .src_addr(rd_addr[9]), .src_data(b_rdata[9]),
    .dst_we(b_we[10]), .dst_addr(b_waddr[10]), .dst_data(b_wdata[10]));

  zeropad1d_layer #(.IN_LEN(122), .CH(8), .PAD_L(2), .PAD_R(3), .IN_FRAC(7), .OUT_FRAC(7)) u_zp1 (
    .clk, .rst_n, .start(lstart[10]), .done(ldone[10]),
    .src_addr(rd_addr[10]), .src_data(b_rdata[10]),
    .dst_we(b_we[11]), .dst_addr(b_waddr[11]), .dst_data(b_wdata[11]));

  concat1d_layer #(.LEN(127), .CA(8), .CB(6), .A_FRAC(7), .B_FRAC(7), .OUT_FRAC(7)) u_cat1 (
    .clk, .rst_n, .start(lstart[11]), .done(ldone[11]),
    .a_addr(rd_addr[11]), .a_data(b_rdata[11]),
    .b_addr(cat1_b_addr), .b_data(b_rdata[6]),
    .dst_we(b_we[12]), .dst_addr(b_waddr[12]), .dst_data(b_wdata[12]));

  conv1d_layer #(.IN_LEN(127), .CIN(14), .COUT(6), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(7)) u_c7 (
    .clk, .rst_n, .start(lstart[12]), .done(ldone[12]),
    .src_addr(rd_addr[12]), .src_data(b_rdata[12]),
    .dst_we(b_we[13]), .dst_addr(b_waddr[13]), .dst_data(b_wdata[13]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C7, PB_C8)),
    .prm_addr(prm.addr - PRM_AW'(PB_C7)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(126), .CIN(6), .COUT(6), .STRIDE(1), .IN_FRAC(7), .OUT_FRAC(6)) u_c8 (
    .clk, .rst_n, .start(lstart[13]), .done(ldone[13]),
    .src_addr(rd_addr[13]), .src_data(b_rdata[13]),
    .dst_we(b_we[14]), .dst_addr(b_waddr[14]), .dst_data(b_wdata[14]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C8, PB_C9)),
    .prm_addr(prm.addr - PRM_AW'(PB_C8)), .prm_data(prm.data));

  upsample1d_layer #(.IN_LEN(125), .CH(6), .IN_FRAC(6), .OUT_FRAC(6)) u_up2 (
    .clk, .rst_n, .start(lstart[14]), .done(ldone[14]),
    .src_addr(rd_addr[14]), .src_data(b_rdata[14]),
    .dst_we(b_we[15]), .dst_addr(b_waddr[15]), .dst_data(b_wdata[15]));

  zeropad1d_layer #(.IN_LEN(250), .CH(6), .PAD_L(4), .PAD_R(4), .IN_FRAC(6), .OUT_FRAC(6)) u_zp2 (
    .clk, .rst_n, .start(lstart[15]), .done(ldone[15]),
    .src_addr(rd_addr[15]), .src_data(b_rdata[15]),
    .dst_we(b_we[16]), .dst_addr(b_waddr[16]), .dst_data(b_wdata[16]));

  concat1d_layer #(.LEN(258), .CA(6), .CB(4), .A_FRAC(6), .B_FRAC(7), .OUT_FRAC(6)) u_cat2 (
    .clk, .rst_n, .start(lstart[16]), .done(ldone[16]),
    .a_addr(rd_addr[16]), .a_data(b_rdata[16]),
    .b_addr(cat2_b_addr), .b_data(b_rdata[3]),
    .dst_we(b_we[17]), .dst_addr(b_waddr[17]), .dst_data(b_wdata[17]));

  conv1d_layer #(.IN_LEN(258), .CIN(10), .COUT(4), .STRIDE(2), .IN_FRAC(6), .OUT_FRAC(6)) u_c9 (
    .clk, .rst_n, .start(lstart[17]), .done(ldone[17]),
    .src_addr(rd_addr[17]), .src_data(b_rdata[17]),
    .dst_we(b_we[18]), .dst_addr(b_waddr[18]), .dst_data(b_wdata[18]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C9, PB_C10)),
    .prm_addr(prm.addr - PRM_AW'(PB_C9)), .prm_data(prm.data));

  conv1d_layer #(.IN_LEN(129), .CIN(4), .COUT(4), .STRIDE(2), .IN_FRAC(6), .OUT_FRAC(9)) u_c10 (
    .clk, .rst_n, .start(lstart[18]), .done(ldone[18]),
    .src_addr(rd_addr[18]), .src_data(b_rdata[18]),
    .dst_we(b_we[19]), .dst_addr(b_waddr[19]), .dst_data(b_wdata[19]),
    .prm_we(prm.we && in_rng(prm.addr, PB_C10, PB_D)),
    .prm_addr(prm.addr - PRM_AW'(PB_C10)), .prm_data(prm.data));

  // Flatten: identity on the position-major 64x4 map
  dense_sigmoid_layer #(.N_IN(256), .N_OUT(520), .RF(260), .IN_FRAC(9), .OUT_FRAC(10),
                        .TBL(SIG_TABLE_SIZE)) u_dense (
    .clk, .rst_n, .start(lstart[19]), .done(ldone[19]),
    .src_addr(rd_addr[19]), .src_data(b_rdata[19]),
    .res_addr, .res_data,
    .prm_we(prm.we && in_rng(prm.addr, PB_D, PB_END)),
    .prm_addr(prm.addr - PRM_AW'(PB_D)), .prm_data(prm.data));

endmodule
