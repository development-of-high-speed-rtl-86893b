// tcp_tx_merger: merges the channel FIFOs into the SiTCP TCP byte stream.
//
// The channels are served in a fixed round-robin order 0, 1, ..., n_ch_act_i-1,
// one 16-bit pixel word per turn, so the host receives each pixel of all
// blocks in channel order. The merger waits on the current channel until it has
// a word; since all channels are written on the same sample strobe they hold
// equal numbers of words, so this wait never blocks for long. A word leaves as two bytes, most significant first, so the 4-bit
// channel ID is the first thing of every word on the wire. Bytes are written
// only while tcp_open_ack_i is high (a connection exists) and tcp_tx_full_i is
// low; otherwise the merger stalls and the FIFOs absorb the data. The paper
// shows the FIFOs feeding SiTCP; the order, the byte order and the SiTCP port
// behaviour are this design's reading of it.
//
// Timing: one byte per clock at most, i.e. 1 Gbit/s at 125 MHz. The FIFO word
// is popped (rd_o) in the cycle its second byte is written. tcp_tx_wr_o and
// tcp_tx_data_o are registered.
module tcp_tx_merger
  import soi_daq_pkg::*;
#(
  parameter int unsigned N_CH = MAX_CH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [4:0]             n_ch_act_i,
  input  logic [N_CH-1:0]        empty_i,
  input  pixel_word_t [N_CH-1:0] data_i,
  output logic [N_CH-1:0]        rd_o,
  input  logic                   tcp_open_ack_i,
  input  logic                   tcp_tx_full_i,
  output logic                   tcp_tx_wr_o,
  output logic [7:0]             tcp_tx_data_o,
  output logic                   stall_o
);

  localparam int unsigned CW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [CW-1:0] ch;
  logic          lsb_phase;   // 0: send MSB byte next, 1: send LSB byte next
  pixel_word_t   cur;

  assign cur = data_i[ch];

  wire can_send = tcp_open_ack_i && !tcp_tx_full_i;
  wire have     = !empty_i[ch];
  wire send     = can_send && have;

  // The last active channel wraps to 0.
  wire last_ch  = (5'(ch) + 5'd1 >= n_ch_act_i) || (ch == CW'(N_CH - 1));

  always_comb begin
    rd_o = '0;
    if (send && lsb_phase) rd_o[ch] = 1'b1;
  end

  assign stall_o = have && !can_send;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ch            <= '0;
      lsb_phase     <= 1'b0;
      tcp_tx_wr_o   <= 1'b0;
      tcp_tx_data_o <= '0;
    end else begin
      tcp_tx_wr_o <= send;
      if (send) begin
        tcp_tx_data_o <= lsb_phase ? cur[7:0] : cur[15:8];
        lsb_phase     <= !lsb_phase;
        if (lsb_phase) ch <= last_ch ? '0 : ch + 1'b1;
      end
    end
  end

  wr_only_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    tcp_tx_wr_o |-> $past(tcp_open_ack_i && !tcp_tx_full_i))
    else $error("tcp_tx_merger: byte written while SiTCP not ready");

endmodule
