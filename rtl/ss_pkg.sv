// ss_pkg: types and constants shared by the semi-streaming CNN engines.
//
// Every engine moves activations as 16-channel "beats": 16 unsigned 8-bit
// values packed into 128 bits, channel 0 in bits [7:0]. Rescaling follows the
// integer-only form r = r0 + (ACC*MULT)>>SHIFT followed by a MIN/MAX clamp;
// the MULT/SHIFT/zero-point fields travel in the rq_t record. The config
// records (c2d_cfg_t, dwc_cfg_t, pw_cfg_t, add_cfg_t, buf_cfg_t) are the
// per-layer settings a host writes before starting an engine; their field
// widths are this design's choice, sized for MobileNetV2 (224x224 input,
// at most 1280 channels). pwr_t is the single parameter-write bus used to load
// weight and bias memories (a 288-bit word is the widest memory, the PRO bias).
package ss_pkg;

  localparam int LANES  = 16;            // channels per beat
  localparam int BEAT_W = LANES * 8;     // 128-bit beat
  localparam int PWR_W  = 288;           // widest parameter word

  typedef logic [BEAT_W-1:0] beat_t;

  // Requantisation constants of one layer (eq. 4-5)
  typedef struct packed {
    logic [31:0] mult;     // MULT, unsigned, value in [0.5,1) as Q0.32 in practice
    logic [7:0]  shift;    // SHIFT, arithmetic right shift applied to ACC*MULT
    logic [7:0]  oz;       // RES0, output zero point
    logic [7:0]  act_min;  // MIN of the clamp
    logic [7:0]  act_max;  // MAX of the clamp
  } rq_t;

  // Parameter write bus (weights and biases)
  typedef struct packed {
    logic              en;
    logic [4:0]        mem;    // memory index inside an engine
    logic [11:0]       addr;   // word address in that memory
    logic [PWR_W-1:0]  data;
  } pwr_t;

  typedef struct packed {
    logic [8:0] rows;      // input frame height
    logic [8:0] cols;      // input frame width
    logic       stride2;   // 1: stride 2, 0: stride 1
    logic [7:0] az;        // activation zero point (also the padding value)
    logic [7:0] wz;        // weight zero point
    rq_t        rq;
  } c2d_cfg_t;

  typedef struct packed {
    logic [8:0] rows;
    logic [8:0] cols;
    logic       stride2;
    logic       pool;      // 1: average pooling over the whole frame
    logic [6:0] npass;     // number of 16-channel passes (channels/16)
    logic [7:0] az;
    logic [7:0] wz;
    rq_t        rq;
  } dwc_cfg_t;

  typedef struct packed {
    logic [16:0] npix;     // pixels in the frame
    logic [6:0]  apass;    // input channels / 16
    logic [6:0]  fpass;    // filters / 16
    logic [7:0]  az;
    logic [7:0]  wz;
    rq_t         rq;
  } pw_cfg_t;

  typedef struct packed {
    logic        add_en;   // 1: add the FIFO stream to the input stream
    logic        store_en; // 1: copy the output stream into the FIFO
    logic [7:0]  a1z;
    logic [7:0]  a2z;
    logic [31:0] mult1;
    logic [7:0]  shift1;
    logic [31:0] mult2;
    logic [7:0]  shift2;
    logic [31:0] mult3;
    logic [7:0]  shift3;
    logic [7:0]  oz;
    logic [7:0]  act_min;
    logic [7:0]  act_max;
  } add_cfg_t;

  typedef struct packed {
    logic [16:0] npix;      // pixels per 16-channel frame
    logic [6:0]  nb;        // 16-channel batches
    logic        pix_major; // 1: stream order pixel-major (pixel outer, batch inner)
    logic [6:0]  rep;       // read side, pixel-major: times each pixel is repeated
  } buf_cfg_t;

  // Engine selector of the top-level parameter-write port
  typedef enum logic [1:0] { ENG_C2D = 2'd0, ENG_DWC = 2'd1, ENG_PRO = 2'd2, ENG_EXP = 2'd3 } engine_e;

  // Stream routing of the top level (set per round by the host)
  typedef struct packed {
    logic dwc_from_c2d;   // DWC pass 0 reads C2D stream A instead of buffer A
    logic bufa_from_c2d;  // buffer A is written from C2D stream B instead of EXP
    logic dwc_to_out;     // DWC output goes to the output port instead of buffer B
    logic add_to_out;     // ADD output goes to the output port instead of EXP
  } route_t;

  // One-cycle start strobes of the top level
  typedef struct packed {
    logic c2d, dwc, pro, exp_e, bufa_wr, bufa_rd, bufb_wr, bufb_rd;
  } starts_t;

  // Busy flags of the top level
  typedef struct packed {
    logic c2d, dwc, pro, exp_e, bufa_wr, bufa_rd, bufb_wr, bufb_rd;
  } busy_t;

  // (ACC*MULT)>>>SHIFT + RES0, clamped to [MIN,MAX]
  function automatic logic [7:0] requantize(input logic signed [31:0] acc, input rq_t q);
    logic signed [64:0] prod;
    logic signed [64:0] res;
    prod = 65'(acc) * $signed({33'd0, q.mult});
    res  = (prod >>> q.shift) + $signed({57'd0, q.oz});
    if (res < $signed({57'd0, q.act_min}))      return q.act_min;
    else if (res > $signed({57'd0, q.act_max})) return q.act_max;
    else                                        return res[7:0];
  endfunction

endpackage
