// testbed_pkg: constants shared by the programmable-logic part of the
// millimetre-wave OFDM testbed and by its testbenches.
//
// The OFDM frame numbers (480 samples, 16-sample short training symbol
// repeated 10 times, 32-sample cyclic prefix plus two 64-sample long training
// symbols, two 80-sample data symbols) and the interpolation factor of 10 are
// the published frame format; they are used here only by the testbenches to
// build realistic traffic. The stream word widths and the register map of the
// packet generator are this design's own choice.
package testbed_pkg;

  // ---------------- OFDM frame format (baseband, 30.72 MSPS) ----------------
  localparam int unsigned FRAME_LEN     = 480;  // complex samples per frame
  localparam int unsigned STS_LEN       = 16;   // short training symbol
  localparam int unsigned STS_REPEAT    = 10;   // short preamble = 160 samples
  localparam int unsigned LTS_CP_LEN    = 32;   // long preamble cyclic prefix
  localparam int unsigned LTS_LEN       = 64;   // long training symbol (x2)
  localparam int unsigned DATA_SYM_LEN  = 64;   // data symbol body
  localparam int unsigned DATA_CP_LEN   = 16;   // data symbol cyclic prefix
  localparam int unsigned DATA_SYMBOLS  = 2;
  // Upsampling done before the DMA (30.72 MSPS -> 307.2 MSPS)
  localparam int unsigned INTERP        = 10;
  localparam int unsigned TX_FRAME_SAMPLES = FRAME_LEN * INTERP;  // 4800

  // ---------------- Sample format ----------------
  // One I or Q component: 16-bit two's complement, full scale -2^15..2^15-1.
  localparam int unsigned SAMPLE_W = 16;
  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // One DAC stream beat carries one complex sample, I in the low half.
  typedef struct packed {
    sample_t q;
    sample_t i;
  } iq_t;

  // ---------------- Packet generator AXI4-Lite register map ----------------
  localparam int unsigned PG_ADDR_W     = 4;
  localparam logic [PG_ADDR_W-1:0] PG_REG_CTRL    = 4'h0; // W: bit0 = start
  localparam logic [PG_ADDR_W-1:0] PG_REG_PKT_LEN = 4'h4; // RW: samples per packet
  localparam logic [PG_ADDR_W-1:0] PG_REG_STATUS  = 4'h8; // R: see PG_ST_*
  localparam logic [PG_ADDR_W-1:0] PG_REG_DROPS   = 4'hC; // R: dropped sample pairs

  localparam int unsigned PG_ST_BUSY    = 0;
  localparam int unsigned PG_ST_DONE    = 1;
  localparam int unsigned PG_ST_OVERRUN = 2;

  // AXI response codes
  localparam logic [1:0] AXI_RESP_OKAY = 2'b00;

endpackage
