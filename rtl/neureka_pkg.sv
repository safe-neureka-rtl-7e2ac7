// neureka_pkg: sizes and types shared by the Safe-NEureka blocks.
//
// The accelerator has a 4x4 processing-element (PE) array split into two 4x2
// subarrays (datapath 0 = main, datapath 1 = shadow/second). Each PE owns one
// output pixel and 32 output channels. Activations are 8-bit unsigned,
// weights 8-bit signed. The memory port carries 288 bits (nine 32-bit words)
// of payload per cycle, each word extended to 39 bits by SEC-DED ECC.
// Array sizes, 32 channels per PE, 288-bit port and 7 check bits follow the
// paper; the memory layouts, tag format and register map are this design's
// own choices and are described where they are used.
package neureka_pkg;

  // PE array geometry
  localparam int unsigned SUB_H   = 4;              // rows of a subarray
  localparam int unsigned SUB_W   = 2;              // columns of a subarray
  localparam int unsigned N_PE    = SUB_H * SUB_W;  // PEs per subarray (8)
  localparam int unsigned N_DP    = 2;              // datapaths (subarrays)
  localparam int unsigned K_SIZE  = 3;              // 3x3 filter
  localparam int unsigned N_TAPS  = K_SIZE * K_SIZE;
  localparam int unsigned IN_H    = SUB_H + K_SIZE - 1;  // 6 input rows per tile
  localparam int unsigned IN_W    = SUB_W + K_SIZE - 1;  // 4 input cols per tile
  localparam int unsigned N_PIX   = IN_H * IN_W;         // 24 input pixels per tile

  // Channels
  localparam int unsigned CH_BLK  = 32;             // channels per block (IC and OC)
  localparam int unsigned OC_PER_BEAT = 4;          // output channels per weight beat
  localparam int unsigned BEATS_PER_IC = CH_BLK / OC_PER_BEAT;  // 8

  // Data widths
  localparam int unsigned ACT_W   = 8;
  localparam int unsigned WGT_W   = 8;
  localparam int unsigned ACC_W   = 32;
  localparam int unsigned PIX_W   = CH_BLK * ACT_W; // 256 bits: one pixel, 32 channels
  localparam int unsigned OUT_W   = CH_BLK * ACT_W; // 256 bits: 32 quantised outputs

  // Memory port
  localparam int unsigned N_WORDS = 9;
  localparam int unsigned DATA_W  = N_WORDS * 32;   // 288
  localparam int unsigned WORD_ECC_W = 39;
  localparam int unsigned ECC_DATA_W = N_WORDS * WORD_ECC_W;  // 351
  localparam int unsigned BE_W    = DATA_W / 8;     // 36
  localparam int unsigned META_W  = 32 + BE_W + 1;  // addr + be + we = 69

  // Redundancy time shift (cycles) between main and shadow datapaths
  localparam int unsigned TIMESHIFT = 1;

  // Tag that travels with a read request and comes back with its data.
  typedef struct packed {
    logic       is_wt;   // 1: weight beat, 0: input pixel
    logic [1:0] bmask;   // input: which input buffers take the pixel
    logic [7:0] idx;     // input: pixel index; weight: {ic[4:0], beat[2:0]}
  } tag_t;

  // Read response delivered to the engine.
  typedef struct packed {
    logic              valid;
    tag_t              tag;
    logic [DATA_W-1:0] data;
  } rsp_t;

  // Quantisation parameters: out = sat_u8((acc * scale) >>> shift)
  typedef struct packed {
    logic [7:0] scale;
    logic [4:0] shift;
  } quant_t;

  // Engine control from the controller.
  typedef struct packed {
    logic       redundancy;  // 1: redundancy (DMR) mode
    logic       clear;       // synchronous clear of accumulators
    logic       chk_en;      // output check in progress
    logic       so_dp;       // streamout: datapath select
    logic [2:0] so_pe;       // streamout: PE select
    quant_t     quant;
  } eng_ctrl_t;

  // Controller FSM states.
  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_MM, S_CHECK, S_ERROR, S_STREAMOUT, S_DONE
  } state_e;

  // Register map (word offsets on the configuration port)
  localparam logic [3:0] REG_TRIGGER  = 4'd0;   // write: start a job
  localparam logic [3:0] REG_STATUS   = 4'd1;   // read: bit0 busy
  localparam logic [3:0] REG_HMR_MODE = 4'd2;   // bit0: 1 = redundancy mode
  localparam logic [3:0] REG_ERR_STAT = 4'd3;   // detected datapath mismatches (write clears)
  localparam logic [3:0] REG_ECC_CORR = 4'd4;   // corrected ECC errors (write clears)
  localparam logic [3:0] REG_ECC_UNC  = 4'd5;   // uncorrectable ECC errors (write clears)
  localparam logic [3:0] REG_IN_PTR   = 4'd6;
  localparam logic [3:0] REG_WT_PTR   = 4'd7;
  localparam logic [3:0] REG_OUT_PTR  = 4'd8;
  localparam logic [3:0] REG_KI       = 4'd9;   // input channels (multiple of 32)
  localparam logic [3:0] REG_KO       = 4'd10;  // output channels (multiple of 32)
  localparam logic [3:0] REG_HO       = 4'd11;  // output height (multiple of 4)
  localparam logic [3:0] REG_WO       = 4'd12;  // output width (multiple of 2)
  localparam logic [3:0] REG_QUANT    = 4'd13;  // [7:0] scale, [12:8] shift

  // Job configuration held in the register file.
  typedef struct packed {
    logic        redundancy;
    logic [31:0] in_ptr;
    logic [31:0] wt_ptr;
    logic [31:0] out_ptr;
    logic [15:0] ki;
    logic [15:0] ko;
    logic [15:0] ho;
    logic [15:0] wo;
    quant_t      quant;
  } job_cfg_t;

  // Tile position produced by a uloop.
  typedef struct packed {
    logic [10:0] ko_t;   // output-channel block
    logic [10:0] h_t;    // output row tile (4 rows)
    logic [10:0] w_t;    // output column tile (2 columns)
    logic [10:0] ki_t;   // input-channel block
  } tile_idx_t;

  // Everything one controller copy drives; the three copies are voted on this.
  typedef struct packed {
    eng_ctrl_t   eng;
    logic        src_valid;
    logic [31:0] src_addr;
    tag_t        src_tag;
    logic        snk_valid;
    logic [31:0] snk_addr;
    logic        busy;
    logic        done;
    logic        err_detected;
    logic [31:0] cfg_rdata;
    logic        cfg_rvalid;
    state_e      state;
  } ctrl_out_t;

endpackage
