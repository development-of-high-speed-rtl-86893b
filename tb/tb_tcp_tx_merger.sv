// tb_tcp_tx_merger: feeds tcp_tx_merger from behavioural show-ahead FIFOs
// (queues in the testbench) filled at random, with random SiTCP back-pressure
// (TX_FULL) and connection loss (OPEN_ACK low). The received byte stream must
// be, in order, channel 0, 1, ..., n-1, 0, ... words, each MSB byte first,
// with the data pushed into each channel in order; no byte may be written in a
// cycle after SiTCP was not ready. With no back-pressure it must reach one byte
// per clock.
module tb_tcp_tx_merger;
  import soi_daq_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic [4:0] nact = 4;
  logic [N-1:0] empty, rd;
  pixel_word_t [N-1:0] data;
  logic open_ack = 0, full = 0, tx_wr, stall;
  logic [7:0] tx_data;
  pixel_word_t q[N][$];          // contents of the modelled FIFOs
  pixel_word_t sent[N][$];       // words pushed, for the reference
  int checks = 0, failures = 0;
  int exp_ch = 0, nbytes = 0, n_stall = 0, bytes_burst = 0;
  logic [7:0] msb;
  logic ready_q = 0;

  always #4 clk = ~clk;

  tcp_tx_merger #(.N_CH(N)) dut (.clk, .rst_n, .n_ch_act_i(nact), .empty_i(empty),
    .data_i(data), .rd_o(rd), .tcp_open_ack_i(open_ack), .tcp_tx_full_i(full),
    .tcp_tx_wr_o(tx_wr), .tcp_tx_data_o(tx_data), .stall_o(stall));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  always_comb
    for (int c = 0; c < N; c++) begin
      empty[c] = (q[c].size() == 0);
      data[c]  = (q[c].size() != 0) ? q[c][0] : '0;
    end

  // FIFO model: pop on rd, push random data on a random strobe
  int push_pct = 10;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      if (rd[c]) begin
        chk(q[c].size() != 0, "pop from empty");
        void'(q[c].pop_front());
      end
    end
    // all active channels receive a word together, as on a sample strobe
    if (($urandom % 100) < push_pct)
      for (int c = 0; c < nact; c++) begin
        pixel_word_t w;
        w.ch_id = 4'(c);
        w.adc   = 12'($urandom);
        q[c].push_back(w);
        sent[c].push_back(w);
      end
    if (stall) n_stall++;
  end

  // Byte stream checker
  always @(posedge clk) if (rst_n) begin
    if (tx_wr) begin
      chk(ready_q, "write while SiTCP not ready");
      if (nbytes % 2 == 0) msb = tx_data;
      else begin
        pixel_word_t exp;
        if (sent[exp_ch].size() == 0) begin
          chk(0, "word from a channel with nothing sent");
        end else begin
          exp = sent[exp_ch].pop_front();
          chk({msb, tx_data} == exp, $sformatf("word %h exp %h ch %0d", {msb, tx_data}, exp, exp_ch));
        end
        exp_ch = (exp_ch + 1 >= nact) ? 0 : exp_ch + 1;
      end
      nbytes++;
      bytes_burst++;
    end
    ready_q = open_ack && !full;
  end

  task automatic drain();
    int n = 0;
    while (n < 8000 && (q[0].size() + q[1].size() + q[2].size() + q[3].size()) != 0) begin
      @(negedge clk);
      n++;
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    int nb0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random back-pressure
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      full = ($urandom % 100) < 25;
      open_ack = !((t / 700) % 4 == 3);
    end
    // full speed: keep all queues busy, no back-pressure
    push_pct = 100; open_ack = 1; full = 0;
    repeat (20) @(negedge clk);
    nb0 = nbytes;
    repeat (200) @(negedge clk);
    chk(nbytes - nb0 == 200, $sformatf("one byte per clock, got %0d/200", nbytes - nb0));
    // drain with fewer active channels: wait for an even byte count and
    // channel 0 so the switch happens at a word boundary
    push_pct = 0;
    drain();
    for (int c = 0; c < N; c++) chk(q[c].size() == 0 && sent[c].size() == 0, "all sent");
    chk(exp_ch == 0, "ends at channel 0");
    // Reset, then 2 active channels
    rst_n = 0; nact = 2; exp_ch = 0; nbytes = 0;
    repeat (2) @(negedge clk);
    rst_n = 1; push_pct = 15;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      full = ($urandom % 100) < 20;
    end
    push_pct = 0; full = 0;
    drain();
    for (int c = 0; c < N; c++) chk(q[c].size() == 0 && sent[c].size() == 0, "all sent (2 ch)");
    chk(n_stall > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
