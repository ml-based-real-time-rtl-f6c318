// dense_sigmoid_layer: the final Dense layer (256 -> 520) with its sigmoid.
//
// First the N_IN inputs (the flattened 64x4 map, word p*4+c) are read into
// registers, one per cycle. Then, with reuse factor RF, each multiplier is
// used RF times: every cycle OPC = ceil(N_OUT/RF) outputs are computed at
// once, each as a full N_IN-term dot product (OPC*N_IN multipliers; 2*256 =
// 512 at the defaults, giving 260 compute cycles). A cycle earlier the
// weight row for those outputs is read from the weight store. Each sum is
// rounded to ac_fixed<16,6>, mapped to an index of the sigmoid table,
// idx = clamp(floor((x+8)*TBL/16), 0, TBL-1), and the 8-bit table value y
// (y/256 is the probability) is stored as the 16-bit word y*4, i.e. y/256 in
// ac_fixed<16,6>. Results sit in an output register file read through
// res_addr/res_data (one cycle of latency).
//
// Timing: start pulse; done is high N_IN + RF + 3 cycles after start.
// Parameters: index i*N_OUT+o is weight w[i][o] (Keras kernel order),
// N_IN*N_OUT+o bias[o], N_IN*N_OUT+N_OUT+k table entry k.
//
// Sizes, reuse factor 260, ac_fixed<16,6>, 8-bit weights/biases/table follow
// the published design; the table size and range, the unsigned table format
// and the output word format are this implementation's choices.
module dense_sigmoid_layer #(
  parameter int N_IN     = 256,
  parameter int N_OUT    = 520,
  parameter int RF       = 260,
  parameter int IN_FRAC  = 9,
  parameter int OUT_FRAC = 10,
  parameter int TBL      = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        done,
  output logic [unet_pkg::FA_W-1:0]   src_addr,
  input  unet_pkg::act_t              src_data,
  input  logic [unet_pkg::FA_W-1:0]   res_addr,
  output unet_pkg::act_t              res_data,
  input  logic                        prm_we,
  input  logic [unet_pkg::PRM_AW-1:0] prm_addr,
  input  logic [7:0]                  prm_data
);
  import unet_pkg::*;

  localparam int OPC    = (N_OUT + RF - 1) / RF;
  localparam int NW     = N_IN * N_OUT;
  localparam int P_FRAC = IN_FRAC + W_FRAC;
  localparam int TBL_AW = $clog2(TBL);
  localparam int RES_AW = $clog2(RF * OPC);
  // table index = x * TBL/16 + TBL/2 ; x has OUT_FRAC fraction bits
  localparam int IDX_SH = OUT_FRAC - $clog2(TBL / 16);

  logic signed [W_W-1:0] wmem [RF][OPC][N_IN];
  logic signed [B_W-1:0] bias [RF*OPC];
  logic [T_W-1:0]        table_mem [TBL];

  // Parameter load
  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (int'(prm_addr) < NW)
        wmem[(int'(prm_addr) % N_OUT) / OPC][(int'(prm_addr) % N_OUT) % OPC][int'(prm_addr) / N_OUT] <= prm_data;
      else if (int'(prm_addr) < NW + N_OUT)
        bias[int'(prm_addr) - NW] <= prm_data;
      else if (int'(prm_addr) < NW + N_OUT + TBL)
        table_mem[int'(prm_addr) - NW - N_OUT] <= prm_data;
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMP} state_t;
  state_t state;

  act_t                  x    [N_IN];
  logic signed [W_W-1:0] wrow [OPC][N_IN];
  act_t                  res  [RF*OPC];
  int unsigned i, i_d, r, r_d;
  logic        ld_vld, row_vld;

  assign src_addr = FA_W'(i);

  // one dot product per lane over the registered weight row
  function automatic act_t lane_result(input int lane, input int row);
    logic signed [ACC_W-1:0] acc;
    act_t                    v;
    logic signed [ACC_W-1:0] idx;
    acc = ACC_W'(bias[row * OPC + lane]) <<< (P_FRAC - B_FRAC);
    for (int k = 0; k < N_IN; k++) acc += ACC_W'(x[k]) * ACC_W'(wrow[lane][k]);
    v   = requant(acc, P_FRAC, OUT_FRAC);
    idx = (ACC_W'(v) >>> IDX_SH) + ACC_W'(TBL / 2);
    if (idx < 0) idx = 0;
    if (idx > ACC_W'(TBL - 1)) idx = ACC_W'(TBL - 1);
    return act_t'({table_mem[idx[TBL_AW-1:0]], 2'b00});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i <= 0; i_d <= 0; r <= 0; r_d <= 0;
      ld_vld <= 1'b0; row_vld <= 1'b0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      ld_vld  <= 1'b0;
      row_vld <= 1'b0;
      if (ld_vld) x[i_d] <= src_data;
      if (row_vld) begin
        for (int l = 0; l < OPC; l++)
          if (int'(r_d) * OPC + l < N_OUT) res[int'(r_d) * OPC + l] <= lane_result(l, int'(r_d));
        if (r_d == RF - 1) done <= 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin i <= 0; state <= S_LOAD; end
        S_LOAD: begin
          ld_vld <= 1'b1; i_d <= i;
          if (i == N_IN - 1) begin r <= 0; state <= S_COMP; end
          else i <= i + 1;
        end
        S_COMP: begin
          // weight row fetch; the product stage runs one cycle behind
          wrow    <= wmem[r];
          r_d     <= r;
          row_vld <= 1'b1;
          if (r == RF - 1) state <= S_IDLE;
          else r <= r + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) res_data <= (int'(res_addr) < N_OUT) ? res[res_addr[RES_AW-1:0]] : '0;
endmodule
