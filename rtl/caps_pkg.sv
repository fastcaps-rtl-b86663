// caps_pkg: number format, sizes and helper functions shared by the CapsNet
// accelerator.
//
// Every value in memory is a 16-bit signed fixed-point number with FW fractional
// bits (Q5.10). The 16-bit word size follows the paper's 16-bit quantization.
// The split between integer and fraction bits is this design's choice. Wider
// intermediate values (products, sums, logits, exp/log results) use 32-bit
// signed numbers with the same FW fractional bits (acc_t). The conversion
// helpers below round to nearest and saturate.
package caps_pkg;

  localparam int DW       = 16;  // stored word width (paper: 16-bit quantization)
  localparam int FW       = 10;  // fractional bits (assumed)
  localparam int AW       = 32;  // width of wide intermediate values (assumed)
  localparam int PE_LANES = 9;   // multipliers per PE (paper: nine multiplications)

  typedef logic signed [DW-1:0] fx_t;
  typedef logic signed [AW-1:0] acc_t;

  localparam acc_t ACC_MAX = 32'sh7fff_ffff;
  localparam acc_t ACC_MIN = -32'sh7fff_ffff;
  // ln() result for inputs <= 0: far enough below any real logarithm that
  // exp() of a difference involving it underflows to 0.
  localparam acc_t LOG_NEG_INF = -(32'sd1 <<< 20);
  localparam acc_t ONE = acc_t'(1) <<< FW;

  // Saturate a wide value to the 16-bit stored word.
  function automatic fx_t sat_fx(input acc_t a);
    if (a > acc_t'(32767))       return fx_t'(16'sh7fff);
    else if (a < acc_t'(-32768)) return fx_t'(16'sh8000);
    else                         return fx_t'(a);
  endfunction

  // Saturate a 64-bit value to acc_t.
  function automatic acc_t sat_acc(input logic signed [63:0] a);
    if (a > 64'(ACC_MAX))      return ACC_MAX;
    else if (a < 64'(ACC_MIN)) return ACC_MIN;
    else                       return acc_t'(a);
  endfunction

  // Fixed-point product (a*b) >> FW, rounded to nearest and saturated.
  function automatic acc_t fmul(input acc_t a, input acc_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    p = (p + (64'sd1 <<< (FW-1))) >>> FW;
    return sat_acc(p);
  endfunction

  // Layer descriptor handed by the process control unit to the convolution
  // module. Addresses are word addresses in the respective memories.
  typedef struct packed {
    logic [15:0] in_ch;    // input channels
    logic [7:0]  in_h;
    logic [7:0]  in_w;
    logic [15:0] out_ch;   // output channels
    logic [7:0]  out_h;
    logic [7:0]  out_w;
    logic [3:0]  stride;
    logic        relu;     // apply ReLU on the way to the output memory
    logic [23:0] in_base;  // activation memory: input feature map
    logic [23:0] out_base; // activation memory: output feature map
    logic [23:0] w_base;   // weight memory: first kernel of the layer
    logic [23:0] idx_base; // index memory: first index entry of the layer
  } conv_cfg_t;

  // Owner of the shared PE array.
  typedef enum logic [1:0] {PE_OWNER_NONE, PE_OWNER_CONV, PE_OWNER_ROUTING} pe_owner_e;

endpackage
