// channel_fifo: one per-channel buffer between ADC capture and SiTCP.
//
// A synchronous show-ahead FIFO: rdata_o always shows the oldest word while
// empty_o is low, and rd_i pops it. A write while full drops the word and
// pulses overflow_o for one cycle; the stored words are kept. The paper shows
// one FIFO per ADC channel in the user FPGA but gives no depth or policy; the
// depth default (1024 x 16, one 18 kbit block RAM) and the drop-on-full policy
// are this design's choices. Reading an empty FIFO is a protocol error
// (asserted) and is ignored.
module channel_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic             full_o,
  input  logic             rd_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             empty_o,
  output logic             overflow_o,
  output logic [$clog2(DEPTH+1)-1:0] level_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  wire do_wr = wr_i && !full_o;
  wire do_rd = rd_i && !empty_o;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wdata_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      cnt        <= '0;
      overflow_o <= 1'b0;
    end else begin
      overflow_o <= wr_i && full_o;
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (do_wr && !do_rd)      cnt <= cnt + 1'b1;
      else if (do_rd && !do_wr) cnt <= cnt - 1'b1;
    end
  end

  assign rdata_o = mem[rp];
  assign empty_o = (cnt == '0);
  assign full_o  = (cnt == ($clog2(DEPTH+1))'(DEPTH));
  assign level_o = cnt;

  rd_not_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_i |-> !empty_o)
    else $error("channel_fifo: read while empty");

endmodule
