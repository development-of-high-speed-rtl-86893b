// tb_adc_capture: random ADC codes, random strobes and active-channel counts;
// checks one cycle later that exactly the active channels are written and that
// each word carries the channel index in bits 15:12 and the ADC code in 11:0.
module tb_adc_capture;
  import soi_daq_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  logic [N-1:0][ADC_W-1:0] adc;
  logic sample = 0;
  logic [4:0] nact = 13;
  logic [N-1:0] wr;
  pixel_word_t [N-1:0] word;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  adc_capture #(.N_CH(N)) dut (.clk, .rst_n, .adc_data_i(adc), .sample_i(sample),
    .n_ch_act_i(nact), .wr_o(wr), .word_o(word));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [N-1:0][ADC_W-1:0] adc_q;
    logic s_q;
    logic [4:0] n_q;
    adc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < N; c++) adc[c] = ADC_W'($urandom);
      sample = ($urandom % 3) == 0;
      if (t % 100 == 0) nact = 5'(1 + $urandom % 16);
      adc_q = adc; s_q = sample; n_q = nact;
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        chk(wr[c] == (s_q && c < n_q), $sformatf("wr ch%0d t=%0d", c, t));
        if (s_q && c < n_q) begin
          chk(word[c] == {4'(c), adc_q[c]}, $sformatf("word ch%0d = %h", c, word[c]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
