// tb_rbcp_regs: RBCP register accesses. Checks the reset values (INTPIX4 at
// 125 MHz), big-endian byte access of the 32-bit registers, read-back of every
// writable register, the START/STOP/CLEAR pulses, the status and counter
// inputs, the N_CH clamp, out-of-range addresses and the one-cycle acknowledge.
module tb_rbcp_regs;
  import soi_daq_pkg::*;

  logic clk = 0, rst_n = 0;
  logic act = 0, we = 0, re = 0, ack;
  logic [31:0] addr = 0;
  logic [7:0] wd = 0, rdv;
  run_cfg_t cfg;
  logic start, stop, clear;
  logic [3:0] status = 0;
  logic [31:0] fcnt = 0, dcnt = 0;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0, n_clear = 0;

  always #4 clk = ~clk;

  rbcp_regs dut (.clk, .rst_n, .rbcp_act_i(act), .rbcp_addr_i(addr), .rbcp_we_i(we),
    .rbcp_wd_i(wd), .rbcp_re_i(re), .rbcp_ack_o(ack), .rbcp_rd_o(rdv), .cfg_o(cfg),
    .start_o(start), .stop_o(stop), .clear_o(clear), .status_i(status),
    .frame_cnt_i(fcnt), .drop_cnt_i(dcnt));

  always @(posedge clk) if (rst_n) begin
    if (start) n_start++;
    if (stop) n_stop++;
    if (clear) n_clear++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(int a, int d);
    @(negedge clk);
    act = 1; we = 1; addr = a; wd = 8'(d);
    @(negedge clk);
    we = 0;
    chk(ack == 1, $sformatf("write ack @%h", a));
    act = 0;
    @(negedge clk);
    chk(ack == 0, "ack is one cycle");
  endtask

  task automatic rd(int a, output logic [7:0] v);
    @(negedge clk);
    act = 1; re = 1; addr = a;
    @(negedge clk);
    re = 0;
    chk(ack == 1, $sformatf("read ack @%h", a));
    v = rdv;
    act = 0;
  endtask

  function automatic logic [31:0] rd32_exp(logic [31:0] v, int b);
    return v >> (8 * (3 - b));
  endfunction

  task automatic rd32(int a, output logic [31:0] v);
    logic [7:0] b;
    v = 0;
    for (int i = 0; i < 4; i++) begin
      rd(a + i, b);
      v = {v[23:0], b};
    end
  endtask

  task automatic wr32(int a, logic [31:0] v);
    for (int i = 0; i < 4; i++) wr(a + i, 32'(v >> (8 * (3 - i))) & 'hff);
  endtask

  initial begin
    logic [31:0] v;
    logic [7:0] b;
    int s0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values, through the bus and on cfg_o
    rd(2, b);    chk(b == 13, "N_CH reset 13");
    rd32(4, v);  chk(v == 250000, $sformatf("INTEG reset %0d", v));
    rd32(8, v);  chk(v == 32768, "PIX reset");
    rd32(12, v); chk(v == 1, "NFRAMES reset");
    rd(16, b);   chk(b == 0, "SCAN hi");
    rd(17, b);   chk(b == 40, "SCAN lo");
    chk(cfg.n_ch_act == 13 && cfg.integ_cycles == 250000 && cfg.pix_per_ch == 32768 &&
        cfg.scan_cycles == 40 && cfg.n_frames == 1, "cfg_o reset");
    // INTPIX5 setup: 11 ch, 4 ms at 125 MHz, 128 x 896 pixels, 500 frames
    wr(2, 11);
    wr32(4, 500000);
    wr32(8, 128 * 896);
    wr32(12, 500);
    wr(16, 0); wr(17, 40);
    chk(cfg.n_ch_act == 11, "N_CH written");
    chk(cfg.integ_cycles == 500000, $sformatf("INTEG written %0d", cfg.integ_cycles));
    chk(cfg.pix_per_ch == 114688, "PIX written");
    chk(cfg.n_frames == 500, "NFRAMES written");
    rd32(4, v);  chk(v == 500000, "INTEG readback");
    rd32(8, v);  chk(v == 114688, "PIX readback");
    rd(7, b);    chk(b == 8'h20, "INTEG LSB byte (500000 = 0x0007A120)");
    rd(5, b);    chk(b == 8'h07, "INTEG byte 1");
    // single-byte write lands in the addressed byte only
    wr(6, 'h55);
    chk(cfg.integ_cycles == 32'h0007_5520, "byte lane");
    // clamp
    wr(2, 0);   chk(cfg.n_ch_act == 1, "N_CH clamp low");
    wr(2, 40);  chk(cfg.n_ch_act == 16, "N_CH clamp high");
    // scan cycles 16-bit
    wr(16, 'h01); wr(17, 'h02); chk(cfg.scan_cycles == 16'h0102, "SCAN write");
    // control pulses
    s0 = n_start;
    wr(0, 1); chk(n_start == s0 + 1 && n_stop == 0, "START pulse");
    wr(0, 2); chk(n_stop == 1, "STOP pulse");
    wr(0, 4); chk(n_clear == 1, "CLEAR pulse");
    chk(n_start == s0 + 1, "START only once");
    // status and counters
    status = 4'b1011; fcnt = 32'hDEAD_BEEF; dcnt = 32'h0102_0304;
    rd(1, b);    chk(b == 8'h0B, "STATUS");
    rd32(20, v); chk(v == 32'hDEAD_BEEF, "FRAMECNT");
    rd32(24, v); chk(v == 32'h0102_0304, "DROPCNT");
    // unmapped and out-of-range addresses
    rd(3, b);    chk(b == 0, "unmapped reads 0");
    rd(32'h0000_0104, b); chk(b == 0, "high address reads 0");
    wr(32'h0000_0102, 5); chk(cfg.n_ch_act == 16, "high address write ignored");
    // RE without ACT is ignored
    @(negedge clk); re = 1; @(negedge clk); re = 0; chk(ack == 0, "no ack without act");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
