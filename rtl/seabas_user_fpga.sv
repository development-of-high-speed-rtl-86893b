// seabas_user_fpga: readout path of the SEABAS2 user FPGA for INTPIX SOI sensors.
//
// The sensor is divided into blocks (INTPIX4: 13 blocks of 64 x 512 pixels),
// each with its own analog output and board ADC, read in parallel. This module
// times the sensor (integration window, then a pixel scan), samples the N ADC
// channels once per pixel, tags every 12-bit code with a 4-bit channel ID into
// a 16-bit word, buffers each channel in its own FIFO and merges the FIFOs into
// the byte stream of the SiTCP TCP transmitter, which carries it over Gigabit
// Ethernet to the DAQ PC. Run control and status use the SiTCP RBCP (UDP)
// register bus. SiTCP itself, the ADCs and the sensor are outside this module;
// their signals are ports.
//
//   adc_data_i -> adc_capture -> channel_fifo x N_CH -> tcp_tx_merger -> tcp_tx_*
//                     ^ sample                                 ^ open/full
//   rbcp_* <-> rbcp_regs -> readout_sequencer -> integ_o/scan_o/pix_addr_o/sample_o
//
// The chain ADC (12 bit) x N -> FIFO per channel -> SiTCP, N <= 16 and the
// word format follow the paper. The single 125 MHz clock (320 ns = 40 cycles
// per pixel, one TCP byte per cycle = 1 Gbit/s), the FIFO depth, the merge
// order, the register map and the sensor timing ports are this design's own.
//
// Rates at the INTPIX4 defaults: 13 words of 2 bytes per 40-cycle pixel, i.e.
// 26 of 40 byte slots during the scan (650 Mbit/s), 545 Mbit/s averaged over
// the 12.49 ms frame. The FIFOs only fill while SiTCP back-pressures
// (tcp_tx_full_i) or no connection is open; a word written to a full FIFO is
// dropped, counted in DROPCNT and flagged in STATUS.
module seabas_user_fpga
  import soi_daq_pkg::*;
#(
  parameter int unsigned      N_CH             = MAX_CH,
  parameter int unsigned      FIFO_DEPTH       = 1024,
  parameter logic [4:0]       DEF_N_CH_ACT_P   = DEF_N_CH_ACT,
  parameter logic [CNT_W-1:0] DEF_INTEG_P      = DEF_INTEG_CYCLES,
  parameter logic [CNT_W-1:0] DEF_PIX_P        = DEF_PIX_PER_CH,
  parameter logic [15:0]      DEF_SCAN_P       = DEF_SCAN_CYCLES,
  parameter logic [CNT_W-1:0] DEF_N_FRAMES_P   = DEF_N_FRAMES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // board ADCs
  input  logic [N_CH-1:0][ADC_W-1:0] adc_data_i,
  // sensor timing
  output logic                       integ_o,
  output logic                       scan_o,
  output logic                       sample_o,
  output logic [CNT_W-1:0]           pix_addr_o,
  // SiTCP TCP transmit
  input  logic                       tcp_open_ack_i,
  input  logic                       tcp_tx_full_i,
  output logic                       tcp_tx_wr_o,
  output logic [7:0]                 tcp_tx_data_o,
  // SiTCP RBCP
  input  logic                       rbcp_act_i,
  input  logic [31:0]                rbcp_addr_i,
  input  logic                       rbcp_we_i,
  input  logic [7:0]                 rbcp_wd_i,
  input  logic                       rbcp_re_i,
  output logic                       rbcp_ack_o,
  output logic [7:0]                 rbcp_rd_o,
  // status for board LEDs / monitoring
  output logic                       frame_done_o,
  output logic                       stall_o
);

  run_cfg_t         cfg;
  logic             start, stop, clear, busy;
  logic [CNT_W-1:0] frame_cnt;
  logic [CNT_W-1:0] drop_cnt;
  logic             ovf_seen;
  logic [4:0]       n_ch_run;     // active channels, latched at START

  rbcp_regs #(
    .RST_N_CH_ACT(DEF_N_CH_ACT_P), .RST_INTEG_CYCLES(DEF_INTEG_P),
    .RST_PIX_PER_CH(DEF_PIX_P), .RST_SCAN_CYCLES(DEF_SCAN_P),
    .RST_N_FRAMES(DEF_N_FRAMES_P)
  ) u_regs (
    .clk, .rst_n,
    .rbcp_act_i, .rbcp_addr_i, .rbcp_we_i, .rbcp_wd_i, .rbcp_re_i,
    .rbcp_ack_o, .rbcp_rd_o,
    .cfg_o(cfg), .start_o(start), .stop_o(stop), .clear_o(clear),
    .status_i({ovf_seen, scan_o, integ_o, busy}),
    .frame_cnt_i(frame_cnt), .drop_cnt_i(drop_cnt)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)                n_ch_run <= 5'(N_CH < DEF_N_CH_ACT_P ? N_CH : DEF_N_CH_ACT_P);
    else if (start && !busy)   n_ch_run <= (cfg.n_ch_act > 5'(N_CH)) ? 5'(N_CH) : cfg.n_ch_act;
  end

  readout_sequencer u_seq (
    .clk, .rst_n,
    .start_i(start), .stop_i(stop),
    .integ_cycles_i(cfg.integ_cycles), .pix_per_ch_i(cfg.pix_per_ch),
    .scan_cycles_i(cfg.scan_cycles), .n_frames_i(cfg.n_frames),
    .integ_o, .scan_o, .sample_o, .pix_addr_o,
    .busy_o(busy), .frame_done_o, .frame_cnt_o(frame_cnt)
  );

  logic [N_CH-1:0]        cap_wr;
  pixel_word_t [N_CH-1:0] cap_word;

  adc_capture #(.N_CH(N_CH)) u_cap (
    .clk, .rst_n, .adc_data_i, .sample_i(sample_o), .n_ch_act_i(n_ch_run),
    .wr_o(cap_wr), .word_o(cap_word)
  );

  logic [N_CH-1:0]        f_empty, f_full, f_ovf, f_rd;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_level [N_CH];  // fill levels, visible to testbenches
  pixel_word_t [N_CH-1:0] f_data;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    channel_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_i(cap_wr[c]), .wdata_i(cap_word[c]), .full_o(f_full[c]),
      .rd_i(f_rd[c]), .rdata_o(f_data[c]), .empty_o(f_empty[c]),
      .overflow_o(f_ovf[c]), .level_o(f_level[c])
    );
  end

  tcp_tx_merger #(.N_CH(N_CH)) u_merge (
    .clk, .rst_n, .n_ch_act_i(n_ch_run),
    .empty_i(f_empty), .data_i(f_data), .rd_o(f_rd),
    .tcp_open_ack_i, .tcp_tx_full_i, .tcp_tx_wr_o, .tcp_tx_data_o,
    .stall_o
  );

  // Dropped-word bookkeeping.
  logic [5:0] n_ovf;
  always_comb begin
    n_ovf = '0;
    for (int c = 0; c < N_CH; c++) n_ovf += 6'(f_ovf[c]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      drop_cnt <= '0;
      ovf_seen <= 1'b0;
    end else if (n_ovf != '0) begin
      drop_cnt <= drop_cnt + CNT_W'(n_ovf);
      ovf_seen <= 1'b1;
    end
  end

endmodule
