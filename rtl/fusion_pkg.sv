// fusion_pkg: types and constants shared by the wavelet engine and the
// thermal-camera capture path.
//
// The wavelet engine works on 32-bit words.  The reference software keeps
// samples as single-precision floats; this RTL keeps them as signed
// fixed-point numbers with FRAC_BITS fractional bits (a choice of this design,
// made so the multiply-accumulate datapath is plain integer logic).  Filter
// coefficients use the same format.
//
// Register map of the wavelet engine's AXI4-Lite control port (byte offsets),
// and the three command modes named by the paper's description of the engine:
// coefficient loading, forward transform and inverse transform.
package fusion_pkg;

  // ---------------- wavelet engine ----------------
  localparam int unsigned DATA_W    = 32;   // one buffer word (float-sized)
  localparam int unsigned FRAC_BITS = 16;   // Q15.16 fixed point
  localparam int unsigned TAPS      = 12;   // filter length (shift_register[0..11])
  localparam int unsigned HALF_TAPS = TAPS / 2; // priming iterations (i > 5 guard)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [2*DATA_W-1:0] acc_t;

  // Command modes written to CTRL[2:1]
  typedef enum logic [1:0] {
    MODE_IDLE    = 2'd0,
    MODE_COEFF   = 2'd1,   // copy staged coefficients into the filter banks
    MODE_FORWARD = 2'd2,   // analysis filtering of one row
    MODE_INVERSE = 2'd3    // synthesis filtering of one row
  } wav_mode_e;

  // AXI4-Lite register offsets (bytes)
  localparam logic [11:0] REG_CTRL      = 12'h000; // [0] start (self-clearing), [2:1] mode
  localparam logic [11:0] REG_STATUS    = 12'h004; // [0] done (sticky), [1] busy
  localparam logic [11:0] REG_IN_OFF    = 12'h008; // input word offset into memory
  localparam logic [11:0] REG_OUT_OFF   = 12'h00C; // output word offset into memory
  localparam logic [11:0] REG_OUTWIDTH  = 12'h010; // number of output pairs
  localparam logic [11:0] REG_MEM_BASE  = 12'h014; // byte address of the shared memory
  localparam logic [11:0] REG_CYCLES    = 12'h018; // cycles taken by the last command
  localparam logic [11:0] REG_COEFF     = 12'h100; // 4 x 12 staged coefficients
  // staged coefficient groups, 12 words each, in this order from REG_COEFF
  localparam int unsigned CG_FWD_HP = 0, CG_FWD_LP = 1, CG_INV_A = 2, CG_INV_B = 3;

  // AXI response codes
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  // ---------------- thermal camera path ----------------
  // One beat of the 16-bit YUV 4:2:2 video stream (AXI4-Stream video):
  // data[7:0] luma, data[15:8] alternating Cb / Cr.
  typedef struct packed {
    logic [15:0] data;
    logic        user;   // start of frame
    logic        last;   // end of line
  } vid_beat_t;

  // BT.656 timing reference: FF 00 00 XY, XY = {1, F, V, H, P3, P2, P1, P0}
  localparam logic [7:0] BT656_PRE0 = 8'hFF;
  localparam logic [7:0] BT656_PRE1 = 8'h00;

  // Camera-wrapper slave registers (byte offsets)
  localparam logic [3:0] CAM_REG_CTRL   = 4'h0;  // [0] capture enable
  localparam logic [3:0] CAM_REG_STATUS = 4'h4;  // [0] frame ready
  localparam logic [3:0] CAM_REG_DATA   = 4'h8;  // read pops one pixel (Data[7:0])
  localparam logic [3:0] CAM_REG_PIXCNT = 4'hC;  // pixels read from the current frame

endpackage
