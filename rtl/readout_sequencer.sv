// readout_sequencer: frame timing for an integration-type SOI pixel sensor.
//
// A frame is an integration (exposure) window followed by a scan of every pixel
// of a sensor block, all blocks being scanned in parallel. The frame period is
// therefore integ_cycles + pix_per_ch * scan_cycles clock cycles, with no gap:
// for INTPIX4 at 125 MHz, 250 000 + 32 768 * 40 = 1 560 720 cycles = 12.49 ms,
// i.e. the 80 Hz sensor limit. The integrate-then-scan frame, the 320 ns pixel
// period and the 2 ms integration follow the paper; the clock, the exact strobe
// position and the start/stop rules are this design's choices.
//
// Interface and timing:
//  * start_i (pulse) in IDLE latches the configuration; integration begins on
//    the next cycle (integ_o high for exactly integ_cycles_i cycles, minimum 1).
//  * Then scan_o is high for pix_per_ch_i * scan_cycles_i cycles. pix_addr_o
//    holds the pixel index for scan_cycles_i cycles; sample_o pulses in the last
//    cycle of each pixel period, when the ADC output has settled.
//  * frame_done_o pulses with the last sample of a frame; frame_cnt_o counts
//    completed frames of the run. The next frame starts on the following cycle
//    unless n_frames_i frames are done (0 = endless) or stop_i was seen, in
//    which case the sequencer returns to IDLE. stop_i never cuts a frame short.
module readout_sequencer
  import soi_daq_pkg::*;
#(
  parameter int unsigned W = CNT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_i,
  input  logic         stop_i,
  input  logic [W-1:0] integ_cycles_i,
  input  logic [W-1:0] pix_per_ch_i,
  input  logic [15:0]  scan_cycles_i,
  input  logic [W-1:0] n_frames_i,
  output logic         integ_o,
  output logic         scan_o,
  output logic         sample_o,
  output logic [W-1:0] pix_addr_o,
  output logic         busy_o,
  output logic         frame_done_o,
  output logic [W-1:0] frame_cnt_o
);

  seq_state_t   state;
  logic [W-1:0] integ_q, pix_q, nfr_q;
  logic [15:0]  scan_q;
  logic [W-1:0] cnt;        // cycles in the integration window / pixel index
  logic [15:0]  sub;        // cycle within the current pixel period
  logic         stop_pend;

  wire last_sub   = (sub == scan_q - 16'd1) || (scan_q == 16'd0);
  wire last_pix   = (pix_addr_o == pix_q - 1'b1) || (pix_q == '0);
  wire more_frames = !stop_pend && !stop_i &&
                     ((nfr_q == '0) || (frame_cnt_o + 1'b1 < nfr_q));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= SEQ_IDLE;
      integ_q      <= '0;
      pix_q        <= '0;
      nfr_q        <= '0;
      scan_q       <= '0;
      cnt          <= '0;
      sub          <= '0;
      pix_addr_o   <= '0;
      frame_cnt_o  <= '0;
      frame_done_o <= 1'b0;
      stop_pend    <= 1'b0;
    end else begin
      frame_done_o <= 1'b0;
      unique case (state)
        SEQ_IDLE: begin
          if (start_i) begin
            integ_q     <= (integ_cycles_i == '0) ? W'(1) : integ_cycles_i;
            pix_q       <= pix_per_ch_i;
            nfr_q       <= n_frames_i;
            scan_q      <= scan_cycles_i;
            frame_cnt_o <= '0;
            stop_pend   <= 1'b0;
            cnt         <= '0;
            state       <= SEQ_INTEG;
          end
        end
        SEQ_INTEG: begin
          if (stop_i) stop_pend <= 1'b1;
          if (cnt == integ_q - 1'b1) begin
            cnt        <= '0;
            sub        <= '0;
            pix_addr_o <= '0;
            state      <= SEQ_SCAN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        SEQ_SCAN: begin
          if (stop_i) stop_pend <= 1'b1;
          if (last_sub) begin
            sub <= '0;
            if (last_pix) begin
              frame_done_o <= 1'b1;
              frame_cnt_o  <= frame_cnt_o + 1'b1;
              pix_addr_o   <= '0;
              cnt          <= '0;
              state        <= more_frames ? SEQ_INTEG : SEQ_IDLE;
            end else begin
              pix_addr_o <= pix_addr_o + 1'b1;
            end
          end else begin
            sub <= sub + 16'd1;
          end
        end
        default: state <= SEQ_IDLE;
      endcase
    end
  end

  assign integ_o  = (state == SEQ_INTEG);
  assign scan_o   = (state == SEQ_SCAN);
  assign sample_o = (state == SEQ_SCAN) && last_sub;
  assign busy_o   = (state != SEQ_IDLE);

endmodule
