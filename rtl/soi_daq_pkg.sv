// soi_daq_pkg: types and constants shared by the SEABAS2 user-FPGA readout path.
//
// A pixel word is 16 bits: a 4-bit readout channel ID on top of the 12-bit ADC
// code, as the readout format is described for the INTPIX sensors. The register
// addresses are this design's own map for the SiTCP RBCP (UDP) slow-control bus.
// The register reset values describe an INTPIX4 run at a 125 MHz clock:
// 13 channels of 64 x 512 pixels, 320 ns per pixel (40 cycles) and 2 ms of
// integration (250 000 cycles).
package soi_daq_pkg;

  localparam int unsigned ADC_W  = 12;             // ADC resolution
  localparam int unsigned ID_W   = 4;              // readout channel ID width
  localparam int unsigned WORD_W = ADC_W + ID_W;   // 16 bit per pixel
  localparam int unsigned MAX_CH = 16;             // SEABAS2 ADC channels
  localparam int unsigned CNT_W  = 32;             // width of timing/count registers

  typedef struct packed {
    logic [ID_W-1:0]  ch_id;   // most significant: channel ID
    logic [ADC_W-1:0] adc;     // least significant: ADC code
  } pixel_word_t;

  typedef enum logic [1:0] {
    SEQ_IDLE  = 2'd0,
    SEQ_INTEG = 2'd1,
    SEQ_SCAN  = 2'd2
  } seq_state_t;

  // Run configuration, written over RBCP and latched by the sequencer at START.
  typedef struct packed {
    logic [4:0]       n_ch_act;     // active channels, 1..16
    logic [CNT_W-1:0] integ_cycles; // integration window in clock cycles
    logic [CNT_W-1:0] pix_per_ch;   // pixels read by each channel per frame
    logic [15:0]      scan_cycles;  // clock cycles per pixel
    logic [CNT_W-1:0] n_frames;     // frames per run, 0 = until STOP
  } run_cfg_t;

  // RBCP register map (byte addresses, multi-byte registers big-endian).
  localparam logic [7:0] REG_CTRL     = 8'h00; // W: b0 START, b1 STOP, b2 CLEAR counters
  localparam logic [7:0] REG_STATUS   = 8'h01; // R: b0 busy, b1 integ, b2 scan, b3 overflow
  localparam logic [7:0] REG_N_CH     = 8'h02; // R/W: active channels
  localparam logic [7:0] REG_INTEG    = 8'h04; // R/W: 0x04..0x07 integration cycles
  localparam logic [7:0] REG_PIX      = 8'h08; // R/W: 0x08..0x0B pixels per channel
  localparam logic [7:0] REG_NFRAMES  = 8'h0C; // R/W: 0x0C..0x0F frames per run
  localparam logic [7:0] REG_SCAN     = 8'h10; // R/W: 0x10..0x11 cycles per pixel
  localparam logic [7:0] REG_FRAMECNT = 8'h14; // R:   0x14..0x17 frames completed
  localparam logic [7:0] REG_DROPCNT  = 8'h18; // R:   0x18..0x1B words dropped (FIFO full)

  // INTPIX4 defaults at 125 MHz.
  localparam logic [4:0]       DEF_N_CH_ACT     = 5'd13;
  localparam logic [CNT_W-1:0] DEF_INTEG_CYCLES = 32'd250_000;
  localparam logic [CNT_W-1:0] DEF_PIX_PER_CH   = 32'd32_768;
  localparam logic [15:0]      DEF_SCAN_CYCLES  = 16'd40;
  localparam logic [CNT_W-1:0] DEF_N_FRAMES     = 32'd1;

endpackage
