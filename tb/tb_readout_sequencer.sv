// tb_readout_sequencer: checks the frame timing of readout_sequencer cycle by
// cycle against an arithmetic timeline. For a run started at cycle 0 the
// expected outputs at cycle k are derived from frame period T = I + P*S:
// r = k mod T, integ = r < I, scan = r >= I, pixel = (r-I)/S, sample in the
// last cycle of each pixel. Runs: several (I,P,S,frames) sets, a run with
// integration 0 (treated as 1), an endless run ended by STOP mid-frame (the
// frame must finish) and a STOP during integration.
module tb_readout_sequencer;
  import soi_daq_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0, stop = 0;
  logic [31:0] integ = 0, pix = 0, nfr = 0;
  logic [15:0] scan = 0;
  logic integ_o, scan_o, sample_o, busy, fdone;
  logic [31:0] pix_addr, fcnt;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  readout_sequencer dut (
    .clk, .rst_n, .start_i(start), .stop_i(stop),
    .integ_cycles_i(integ), .pix_per_ch_i(pix), .scan_cycles_i(scan), .n_frames_i(nfr),
    .integ_o, .scan_o, .sample_o, .pix_addr_o(pix_addr), .busy_o(busy),
    .frame_done_o(fdone), .frame_cnt_o(fcnt));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Run one configuration; stop_at >= 0 pulses STOP at that cycle of the run.
  task automatic run(int I, int P, int S, int F, int stop_at = -1);
    int Ie, T, nfr_exp, k, r, q;
    int samples, fd_seen;
    Ie = (I == 0) ? 1 : I;
    T  = Ie + P * S;
    @(negedge clk);
    integ = I; pix = P; scan = S; nfr = F;
    start = 1;
    @(negedge clk);
    start = 0;
    // expected number of frames
    if (stop_at >= 0) nfr_exp = stop_at / T + 1;
    else nfr_exp = F;
    samples = 0; fd_seen = 0;
    for (k = 0; k < nfr_exp * T; k++) begin
      if (k == stop_at) stop = 1;
      r = k % T;
      // outputs are checked in the middle of cycle k (after the edge that began it)
      chk(busy == 1, "busy during run");
      chk(integ_o == (r < Ie), $sformatf("integ k=%0d", k));
      chk(scan_o == (r >= Ie), $sformatf("scan k=%0d", k));
      if (r >= Ie) begin
        q = r - Ie;
        chk(pix_addr == q / S, $sformatf("pix_addr k=%0d got %0d", k, pix_addr));
        chk(sample_o == (q % S == S - 1), $sformatf("sample k=%0d", k));
        if (sample_o) samples++;
      end else begin
        chk(sample_o == 0, "no sample while integrating");
      end
      @(negedge clk);
      stop = 0;
      if (fdone) fd_seen++;
    end
    chk(busy == 0, "idle after last frame");
    chk(fcnt == nfr_exp, $sformatf("frame count %0d exp %0d", fcnt, nfr_exp));
    chk(samples == nfr_exp * P, "one sample per pixel");
    chk(fd_seen == nfr_exp, "frame_done pulses");
    repeat (3) begin
      @(negedge clk);
      chk(!busy && !integ_o && !scan_o && !sample_o, "stays idle");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk(!busy && !integ_o && !scan_o, "idle after reset");
    run(5, 4, 3, 2);
    run(1, 7, 1, 3);
    run(0, 3, 2, 1);
    run(10, 16, 4, 1);
    run(6, 5, 2, 0, 30);   // endless run, STOP in frame 2 (T=16)
    run(20, 2, 2, 0, 3);   // STOP during integration of frame 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
