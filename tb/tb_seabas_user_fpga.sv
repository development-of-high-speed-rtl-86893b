// tb_seabas_user_fpga: end-to-end test of the user-FPGA readout path at reduced
// sizes (4 ADC channels, 16-word FIFOs, short frames). A behavioural board
// ADC drives a fresh random code on every channel each cycle; the testbench
// records the codes present at every sample strobe as the expected pixel
// words. A receiver plays the role of SiTCP: it reassembles the byte stream,
// checks the channel order, the channel ID and the code of each word, and
// applies random TX_FULL back-pressure. The board is run only through RBCP
// register accesses, like the DAQ PC would.
//
// Mechanisms made to happen and counted: multi-frame runs with the exact frame
// period, SiTCP back-pressure stalls, a change of sensor geometry and channel
// count between runs (INTPIX4-like to INTPIX5-like set-ups), FIFO overflow
// while the connection is closed (dropped words must equal DROPCNT and the
// STATUS flag), CLEAR, and STOP of an endless run at a frame boundary.
module tb_seabas_user_fpga;
  import soi_daq_pkg::*;
  localparam int N = 4;
  localparam int DEPTH = 16;

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
  int full_pct = 0;
  int n_act = 13;                    // the testbench's copy of the active-channel count
  pixel_word_t exp_q[N][$];          // words expected per channel
  int rx_words = 0, rx_bytes = 0, skipped = 0, exp_ch = 0;
  bit allow_drop = 0;
  logic [7:0] msb;
  int n_frames_done = 0, n_stall = 0, n_drop_seen = 0, n_mode = 0, n_stop = 0, n_multi = 0;
  longint cyc = 0;

  always #4 clk = ~clk;

  seabas_user_fpga #(.N_CH(N), .FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .adc_data_i(adc),
    .integ_o, .scan_o, .sample_o, .pix_addr_o(pix_addr),
    .tcp_open_ack_i(open_ack), .tcp_tx_full_i(full), .tcp_tx_wr_o(tx_wr), .tcp_tx_data_o(tx_data),
    .rbcp_act_i(act), .rbcp_addr_i(addr), .rbcp_we_i(we), .rbcp_wd_i(wd), .rbcp_re_i(re),
    .rbcp_ack_o(ack), .rbcp_rd_o(rdv), .frame_done_o(fdone), .stall_o(stall));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // Board ADC model and SiTCP back-pressure, changed away from the clock edge.
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) adc[c] = ADC_W'($urandom);
    full = ($urandom % 100) < full_pct;
  end

  // Expected words at each sample strobe; received byte stream checker.
  always @(posedge clk) begin
    cyc++;
    if (rst_n && sample_o)
      for (int c = 0; c < n_act; c++) exp_q[c].push_back({4'(c), adc[c]});
    if (rst_n && fdone) n_frames_done++;
    if (rst_n && stall) n_stall++;
    if (rst_n && tx_wr) begin
      if (rx_bytes % 2 == 0) msb = tx_data;
      else begin : word
        pixel_word_t w, e;
        bit found;
        w = {msb, tx_data};
        chk(w.ch_id == 4'(exp_ch), $sformatf("channel order: got %0d exp %0d", w.ch_id, exp_ch));
        found = 0;
        while (!found && exp_q[exp_ch].size() != 0) begin
          e = exp_q[exp_ch].pop_front();
          if (e == w) found = 1;
          else begin
            skipped++;
            chk(allow_drop, $sformatf("word %h missing from ch %0d", e, exp_ch));
          end
        end
        chk(found, $sformatf("unexpected word %h", w));
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

  task automatic configure(int nch, int integ, int pix, int scan, int nfr);
    rbcp_wr(REG_N_CH, nch);
    wr32(REG_INTEG, integ);
    wr32(REG_PIX, pix);
    rbcp_wr(REG_SCAN, scan >> 8);
    rbcp_wr(REG_SCAN + 1, scan & 'hff);
    wr32(REG_NFRAMES, nfr);
  endtask

  // START, then measure the run length from the first integration cycle to
  // the last frame_done, and wait until the FIFOs are drained.
  task automatic run(int nch, output longint run_cycles);
    longint t0;
    logic [7:0] st;
    int guard;
    n_act = nch;
    exp_ch = 0;
    rbcp_wr(REG_CTRL, 1);
    // START is issued with the acknowledge; the run begins one cycle later
    @(negedge clk);
    chk(integ_o, "integration starts right after START");
    t0 = cyc;
    guard = 0;
    do begin @(negedge clk); guard++; end while ((integ_o || scan_o) && guard < 200000);
    run_cycles = cyc - t0;
    guard = 0;
    while (guard < 3000) begin
      int pend = 0;
      for (int c = 0; c < N; c++) pend += exp_q[c].size();
      if (pend == 0) break;
      @(negedge clk);
      guard++;
    end
    repeat (5) @(negedge clk);
    rbcp_rd(REG_STATUS, st);
    chk(st[0] == 0, "not busy after run");
  endtask

  initial begin
    longint rc;
    int fc, dc, f0, s0, rx0;
    logic [7:0] st;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // Reset values: INTPIX4 geometry, 13 channels (more than built: clamped to 4)
    rd32(REG_PIX, fc);  chk(fc == 32768, "PIX reset value");
    rd32(REG_INTEG, fc); chk(fc == 250000, "INTEG reset value");

    // 1) three channels, two frames, random back-pressure
    full_pct = 20;
    configure(3, 20, 30, 8, 2);
    f0 = n_frames_done;
    run(3, rc);
    chk(rc == 2 * (20 + 30 * 8), $sformatf("two-frame run length %0d", rc));
    chk(n_frames_done - f0 == 2, "two frames");
    rd32(REG_FRAMECNT, fc); chk(fc == 2, "FRAMECNT 2");
    chk(rx_words == 2 * 30 * 3, $sformatf("words received %0d", rx_words));
    if (n_frames_done - f0 == 2) n_multi++;

    // 2) mode switch: four channels, longer block, link at full use
    full_pct = 0;
    configure(4, 10, 50, 8, 1);
    rx0 = rx_words;
    run(4, rc);
    chk(rc == 10 + 50 * 8, "one-frame run length");
    chk(rx_words - rx0 == 50 * 4, "words after mode switch");
    rd32(REG_DROPCNT, dc); chk(dc == 0, "no drops while link keeps up");
    if (rx_words - rx0 == 200) n_mode++;

    // 3) overflow: connection closed during the scan
    open_ack = 0;
    allow_drop = 1;
    configure(4, 5, 40, 4, 1);
    rx0 = rx_words; s0 = skipped;
    fork
      run(4, rc);
      begin
        wait (scan_o);
        wait (!scan_o);
        repeat (3) @(negedge clk);
        open_ack = 1;
      end
    join
    // words dropped at the tail of a full FIFO are never received
    for (int c = 0; c < N; c++) begin
      skipped += exp_q[c].size();
      exp_q[c].delete();
    end
    rd32(REG_DROPCNT, dc);
    chk(dc == (skipped - s0), $sformatf("DROPCNT %0d equals words lost %0d", dc, skipped - s0));
    chk(dc == 4 * (40 - DEPTH), $sformatf("drops %0d exp %0d", dc, 4 * (40 - DEPTH)));
    chk(rx_words - rx0 == 4 * DEPTH, "FIFO contents delivered after reconnect");
    rbcp_rd(REG_STATUS, st); chk(st[3], "overflow flag set");
    if (dc > 0) n_drop_seen++;
    rbcp_wr(REG_CTRL, 4);
    rd32(REG_DROPCNT, dc); chk(dc == 0, "CLEAR resets DROPCNT");
    rbcp_rd(REG_STATUS, st); chk(!st[3], "CLEAR resets overflow flag");
    allow_drop = 0;

    // 4) endless run stopped by STOP: the frame in progress completes
    full_pct = 10;
    configure(2, 8, 12, 6, 0);
    n_act = 2; exp_ch = 0;
    f0 = n_frames_done; rx0 = rx_words;
    rbcp_wr(REG_CTRL, 1);
    repeat (200) @(negedge clk);
    rbcp_wr(REG_CTRL, 2);
    wait (!integ_o && !scan_o);
    repeat (200) @(negedge clk);
    rd32(REG_FRAMECNT, fc);
    chk(fc == n_frames_done - f0 && fc >= 2, $sformatf("frames of stopped run %0d", fc));
    chk(rx_words - rx0 == fc * 12 * 2, "whole frames delivered after STOP");
    if (fc >= 2) n_stop++;

    // every mechanism must have happened
    chk(n_multi > 0, "multi-frame run exercised");
    chk(n_stall > 0, "SiTCP back-pressure stall exercised");
    chk(n_mode > 0, "mode switch exercised");
    chk(n_drop_seen > 0, "FIFO overflow exercised");
    chk(n_stop > 0, "STOP exercised");
    $display("mechanisms: multi-frame=%0d stall_cycles=%0d mode_switch=%0d overflow=%0d stop=%0d",
             n_multi, n_stall, n_mode, n_drop_seen, n_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
