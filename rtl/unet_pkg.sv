// unet_pkg: number formats, sizes and helpers shared by the beam-loss
// de-blending U-Net accelerator.
//
// Every activation is a signed 16-bit fixed-point word. A layer's format is
// written ac_fixed<16,x>: x integer bits (sign included) and 16-x fraction
// bits, rounded to nearest with ties to even and saturated on overflow.
// Weights are ac_fixed<8,3> (5 fraction bits), biases ac_fixed<8,4>
// (4 fraction bits) and the sigmoid table holds 8-bit values. The x of each
// layer, the weight/bias/table widths, the 260-in/520-out interface, the
// default precision ac_fixed<16,7> and the dense reuse factor of 260 follow
// the published design. Address widths, the parameter window and the bus
// structs are this implementation's own choices.
package unet_pkg;

  localparam int DATA_W   = 16;   // activation word
  localparam int W_W      = 8;    // weight word, ac_fixed<8,3>
  localparam int W_FRAC   = 5;
  localparam int B_W      = 8;    // bias word, ac_fixed<8,4>
  localparam int B_FRAC   = 4;
  localparam int T_W      = 8;    // sigmoid table entry, 8 fraction bits
  localparam int T_FRAC   = 8;

  localparam int N_INPUTS  = 260; // beam loss monitors per frame
  localparam int N_OUTPUTS = 520; // MI / RR score pair per monitor
  localparam int IN_FRAC   = 9;   // frame samples: default ac_fixed<16,7>

  localparam int FA_W   = 12;     // feature-map address width (max 2580 words)
  localparam int PRM_AW = 18;     // parameter index width (134,434 + table)
  localparam int ACC_W  = 48;     // accumulator width

  localparam int SIG_TABLE_SIZE = 1024; // sigmoid table covers [-8, 8)

  typedef logic signed [DATA_W-1:0] act_t;

  // Avalon memory-mapped transfer, host to agent and agent to host.
  typedef struct packed {
    logic [15:0] address;   // word address
    logic        read;
    logic        write;
    logic [31:0] writedata;
  } avmm_req_t;

  typedef struct packed {
    logic [31:0] readdata;
    logic        readdatavalid;
    logic        waitrequest;
  } avmm_rsp_t;

  // Parameter-load port: one 8-bit parameter per write.
  typedef struct packed {
    logic              we;
    logic [PRM_AW-1:0] addr;
    logic [7:0]        data;
  } prm_wr_t;

  // Re-quantise a wide signed value with fin fraction bits to a 16-bit word
  // with fout fraction bits: round half to even, then saturate.
  function automatic act_t requant(input logic signed [ACC_W-1:0] v,
                                   input int fin, input int fout);
    logic signed [ACC_W-1:0] q;
    logic signed [ACC_W-1:0] rem;
    logic signed [ACC_W-1:0] half;
    int sh;
    if (fin > fout) begin
      sh   = fin - fout;
      q    = v >>> sh;
      rem  = v - (q <<< sh);                 // 0 .. 2^sh-1
      half = ACC_W'(1) <<< (sh - 1);
      if (rem > half || (rem == half && q[0])) q = q + 1;
    end else begin
      q = v <<< (fout - fin);
    end
    if (q > ACC_W'(32767))       return act_t'(16'sh7fff);
    else if (q < -ACC_W'(32768)) return act_t'(16'sh8000);
    else                         return act_t'(q[DATA_W-1:0]);
  endfunction

endpackage
