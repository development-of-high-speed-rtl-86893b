// tb_channel_fifo: random pushes and pops on a small FIFO against a queue
// model. Checks data order, empty/full/level flags, the overflow pulse on a
// write while full and that a dropped word never appears at the output.
module tb_channel_fifo;
  localparam int W = 16, D = 8;

  logic clk = 0, rst_n = 0;
  logic wr = 0, rd = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic full, empty, ovf;
  logic [$clog2(D+1)-1:0] level;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, n_ovf = 0;

  always #4 clk = ~clk;

  channel_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_i(wr), .wdata_i(wdata),
    .full_o(full), .rd_i(rd), .rdata_o(rdata), .empty_o(empty), .overflow_o(ovf),
    .level_o(level));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    bit exp_ovf;
    int pw;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      // phases bias towards filling or draining
      pw = ((t / 500) % 2 == 0) ? 70 : 30;
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      chk(level == q.size(), "level");
      if (q.size() != 0) chk(rdata == q[0], $sformatf("head %h exp %h", rdata, q[0]));
      wr = ($urandom % 100) < pw;
      wdata = W'($urandom);
      rd = (q.size() != 0) && !empty && (($urandom % 100) < 100 - pw);
      exp_ovf = wr && (q.size() == D);
      @(negedge clk);
      if (rd) void'(q.pop_front());
      if (wr && !exp_ovf) q.push_back(wdata);
      chk(ovf == exp_ovf, "overflow pulse");
      if (ovf) n_ovf++;
    end
    chk(n_ovf > 0, "overflow exercised");
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
