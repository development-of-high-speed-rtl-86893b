// adc_capture: samples the board ADCs once per pixel and tags each sample.
//
// On every sample_i strobe the 12-bit code of each active ADC channel is
// registered and a 16-bit pixel word is formed with the 4-bit readout channel
// ID on top, as the paper specifies the readout format (16 bit per pixel,
// 12-bit ADC value, 4-bit channel ID at the top). The ID is the 0-based channel
// index (this design's choice, so that all 16 channels fit in 4 bits).
// Channels at or above n_ch_act_i (e.g. 13 for INTPIX4, 11 for INTPIX5) are
// not written.
//
// The ID field of word_o[c] is the constant c, so synthesis sees those bits
// as constant outputs; they are kept in the word so that every FIFO and the
// merger handle one uniform 16-bit pixel word.
//
// Timing: wr_o[c] and word_o[c] are valid for one cycle, one clock after
// sample_i.
module adc_capture
  import soi_daq_pkg::*;
#(
  parameter int unsigned N_CH = MAX_CH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N_CH-1:0][ADC_W-1:0] adc_data_i,
  input  logic                   sample_i,
  input  logic [4:0]             n_ch_act_i,
  output logic [N_CH-1:0]        wr_o,
  output pixel_word_t [N_CH-1:0] word_o
);

  initial assert (N_CH >= 1 && N_CH <= (1 << ID_W))
    else $error("N_CH must fit the %0d-bit channel ID", ID_W);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_o   <= '0;
      word_o <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        wr_o[c] <= sample_i && (5'(c) < n_ch_act_i);
        if (sample_i) begin
          word_o[c].ch_id <= ID_W'(c);
          word_o[c].adc   <= adc_data_i[c];
        end
      end
    end
  end

endmodule
