// tb_seabas_full: the readout path at its default size (16 ADC channels,
// 1024-word FIFOs, 125 MHz) running the two sensor set-ups of the X-ray
// imaging tests, one full frame each:
//   INTPIX4: register reset values, 13 channels x 64 x 512 pixels, 2 ms
//            integration, 320 ns per pixel -> frame of 1 560 720 cycles
//            (12.49 ms, 80 Hz), 425 984 words.
//   INTPIX5: written over RBCP, 11 channels x 128 x 896 pixels, 4 ms
//            integration -> frame of 5 087 520 cycles (40.7 ms), 1 261 568 words.
// SiTCP back-pressure (TX_FULL) is applied on 10 % of the cycles at random.
// Every word is checked against the ADC code sampled for it; the frame length,
// the byte count, the absence of drops and the average data rate are checked.
module tb_seabas_full;
  import soi_daq_pkg::*;
  localparam int N = MAX_CH;

  logic clk = 0, rst_n = 0;
  logic [N-1:0][ADC_W-1:0] adc;
  logic integ_o, scan_o, sample_o, fdone, stall;
  logic [31:0] pix_addr;
  logic open_ack = 1, full = 0, tx_wr;
  logic [7:0] tx_data;
  logic act = 0, we = 0, re = 0, ack;
  logic [31:0] addr = 0;
  logic [7:0] wd = 0, rdv;

  int checks = 0, failures = 0;
  int n_act = 13;
  pixel_word_t exp_q[N][$];
  longint rx_words = 0, rx_bytes = 0, cyc = 0, n_stall = 0;
  int exp_ch = 0;
  logic [7:0] msb;
  int bad_words = 0;

  always #4 clk = ~clk;

  seabas_user_fpga dut (
    .clk, .rst_n, .adc_data_i(adc),
    .integ_o, .scan_o, .sample_o, .pix_addr_o(pix_addr),
    .tcp_open_ack_i(open_ack), .tcp_tx_full_i(full), .tcp_tx_wr_o(tx_wr), .tcp_tx_data_o(tx_data),
    .rbcp_act_i(act), .rbcp_addr_i(addr), .rbcp_we_i(we), .rbcp_wd_i(wd), .rbcp_re_i(re),
    .rbcp_ack_o(ack), .rbcp_rd_o(rdv), .frame_done_o(fdone), .stall_o(stall));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  always @(negedge clk) begin
    for (int c = 0; c < N; c++) adc[c] = ADC_W'($urandom);
    full = ($urandom % 10) == 0;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && sample_o)
      for (int c = 0; c < n_act; c++) exp_q[c].push_back({4'(c), adc[c]});
    if (rst_n && stall) n_stall++;
    if (rst_n && tx_wr) begin
      if (rx_bytes % 2 == 0) msb = tx_data;
      else begin : word
        pixel_word_t w;
        w = {msb, tx_data};
        checks++;
        if (exp_q[exp_ch].size() == 0 || w != exp_q[exp_ch][0]) begin
          failures++;
          if (failures < 20) $display("FAIL word %h on channel %0d at cycle %0d", w, exp_ch, cyc);
        end
        if (exp_q[exp_ch].size() != 0) void'(exp_q[exp_ch].pop_front());
        rx_words++;
        exp_ch = (exp_ch + 1 >= n_act) ? 0 : exp_ch + 1;
      end
      rx_bytes++;
    end
  end

  task automatic rbcp_wr(int a, int d);
    @(negedge clk);
    act = 1; we = 1; addr = a; wd = 8'(d);
    @(negedge clk);
    we = 0; act = 0;
    chk(ack, "rbcp write ack");
  endtask

  task automatic rbcp_rd(int a, output logic [7:0] v);
    @(negedge clk);
    act = 1; re = 1; addr = a;
    @(negedge clk);
    re = 0; act = 0;
    chk(ack, "rbcp read ack");
    v = rdv;
  endtask

  task automatic wr32(int a, int v);
    for (int i = 0; i < 4; i++) rbcp_wr(a + i, (v >> (8 * (3 - i))) & 'hff);
  endtask

  task automatic rd32(int a, output int v);
    logic [7:0] b;
    v = 0;
    for (int i = 0; i < 4; i++) begin rbcp_rd(a + i, b); v = (v << 8) | b; end
  endtask

  task automatic frame(string name, int nch, int integ, int pix);
    longint t0, frame_cycles, w0, b0;
    int dc, fc, guard;
    real mbps_scan, mbps_avg;
    n_act = nch; exp_ch = 0;
    w0 = rx_words; b0 = rx_bytes;
    rbcp_wr(REG_CTRL, 1);
    @(negedge clk);
    t0 = cyc;
    chk(integ_o, "integration follows START");
    while (integ_o || scan_o) @(negedge clk);
    frame_cycles = cyc - t0;
    guard = 0;
    while (rx_words - w0 < longint'(nch) * pix && guard < 100000) begin
      @(negedge clk);
      guard++;
    end
    repeat (10) @(negedge clk);
    chk(frame_cycles == longint'(integ) + longint'(pix) * 40,
        $sformatf("%s frame length %0d", name, frame_cycles));
    chk(rx_words - w0 == longint'(nch) * pix, $sformatf("%s words %0d", name, rx_words - w0));
    chk(rx_bytes - b0 == 2 * longint'(nch) * pix, $sformatf("%s bytes", name));
    rd32(REG_DROPCNT, dc); chk(dc == 0, $sformatf("%s no dropped words", name));
    rd32(REG_FRAMECNT, fc); chk(fc == 1, $sformatf("%s FRAMECNT", name));
    mbps_avg  = real'(rx_bytes - b0) * 8.0 / (real'(frame_cycles) * 8.0e-9) / 1.0e6;
    mbps_scan = real'(nch) * 16.0 / 320.0e-9 / 1.0e6;
    $display("%s: frame %0d cycles = %.3f ms (%.1f Hz), %0d words, %.0f Mbit/s average, %.0f Mbit/s during scan",
             name, frame_cycles, real'(frame_cycles) * 8.0e-6, 1.0e9 / (real'(frame_cycles) * 8.0),
             rx_words - w0, mbps_avg, mbps_scan);
  endtask

  initial begin
    int v;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // INTPIX4 from the reset values
    frame("INTPIX4", 13, 250_000, 64 * 512);
    chk(rx_bytes * 8 * 80 >= 545_000_000, "INTPIX4 data for 80 Hz reaches 545 Mbit/s");
    // INTPIX5 over RBCP
    rbcp_wr(REG_N_CH, 11);
    wr32(REG_INTEG, 500_000);
    wr32(REG_PIX, 128 * 896);
    rd32(REG_PIX, v); chk(v == 114_688, "PIX readback");
    frame("INTPIX5", 11, 500_000, 128 * 896);
    chk(n_stall > 0, "back-pressure exercised");
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (7_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
