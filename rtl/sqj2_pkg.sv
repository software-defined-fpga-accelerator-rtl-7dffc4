// sqj2_pkg -- constants, types and helper functions shared by the SqueezeJet-2
// convolution/maxpool accelerator.
//
// The accelerator computes one CNN layer per invocation on 8-bit dynamic
// fixed-point data.  PAR_FACT processing elements (PEs) each perform CHI_NUM
// multiply-accumulates per cycle, so 16 x 16 = 256 MACs run in parallel; these
// two numbers are the published configuration.  The *_MAX cache sizes are not
// published and are this design's choice, sized for SqueezeNet v1.1 and ZynqNet
// layers.  All caches are stored as words of CHI_NUM bytes, so one word read
// per cycle feeds every PE.
package sqj2_pkg;

  // Parallelism (published configuration).
  parameter int unsigned PAR_FACT = 16;  // number of PEs
  parameter int unsigned CHI_NUM  = 16;  // MACs per PE, values per cache word

  // Cache sizes in bytes (this design's choice).
  parameter int unsigned K_MAX             = 3;      // largest kernel height/width
  parameter int unsigned WIXCHI_MAX        = 8192;   // one padded input row
  parameter int unsigned KXKXCHI_MAX       = 4608;   // one window (3*3*512)
  parameter int unsigned Q_CHOXKXKXCHI_MAX = 16384;  // weights per PE
  parameter int unsigned CHO_MAX           = 1024;   // output channels
  parameter int unsigned POOL_W_MAX        = 64;     // pooled row width
  parameter int unsigned POOL_CH_MAX       = 256;    // channels when pooling

  parameter int unsigned DW    = 8;            // data width (8-bit dynamic fixed point)
  parameter int unsigned ACC_W = 32;           // accumulator width
  parameter int unsigned WORD_W = CHI_NUM * DW;

  typedef logic signed [DW-1:0]     data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [WORD_W-1:0] word_t;   // CHI_NUM bytes
  typedef logic signed [5:0]        fl_t;     // fraction length (may be negative)

  // Layer configuration, written over the GP register port.
  typedef struct packed {
    logic [15:0] h_in;       // input rows
    logic [15:0] w_in;       // input columns
    logic [15:0] chi;        // input channels (multiple of CHI_NUM)
    logic [15:0] cho;        // output channels (<= CHO_MAX)
    logic [3:0]  kernel;     // kernel height = width
    logic [3:0]  stride;
    logic [3:0]  pad;
    logic [15:0] h_out;      // output rows of the convolution
    logic [15:0] w_out;      // output columns of the convolution
    fl_t         ei;         // input fraction length
    fl_t         eo;         // output fraction length
    fl_t         ep;         // parameter (weight and bias) fraction length
    logic        use_relu;
    logic        use_pool;   // 0: maxpool bypassed
    logic [3:0]  pool_k;     // pool kernel
    logic [3:0]  pool_s;     // pool stride
    logic [15:0] pool_h_out; // pooled rows
    logic [15:0] pool_w_out; // pooled columns
  } layer_cfg_t;

  // Commands of the feature-map loader (the functions of the HLS listing).
  typedef enum logic [1:0] {
    LD_SHIFT  = 2'd0,  // shift_linebuf() followed by init_linebuf_win()
    LD_UPDATE = 2'd1,  // update_linebuf_win()
    LD_DRAIN  = 2'd2   // discard what is left of the input stream
  } ld_cmd_e;

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
