// rbcp_regs: slow-control registers on the SiTCP RBCP (UDP) bus.
//
// The DAQ PC controls the board over UDP; SiTCP turns each UDP register access
// into one RBCP cycle: a one-cycle rbcp_we_i or rbcp_re_i with a 32-bit byte
// address and 8-bit data, answered by a one-cycle rbcp_ack_o (with rbcp_rd_o on
// reads) on the next clock. Addresses outside 0x00..0x1B are acknowledged and
// read as 0. The register map below is this design's own; the paper only says
// that the PC and the board talk over TCP/UDP and that the integration time
// differs per sensor (2 ms for INTPIX4, 4 ms for INTPIX5).
//
//   0x00 CTRL      W   b0 START run, b1 STOP run, b2 clear overflow flag and drop count
//   0x01 STATUS    R   b0 busy, b1 integrating, b2 scanning, b3 FIFO overflow seen
//   0x02 N_CH      RW  active ADC channels (1..16)
//   0x04 INTEG     RW  4 bytes, integration window in clock cycles
//   0x08 PIX       RW  4 bytes, pixels per channel per frame
//   0x0C NFRAMES   RW  4 bytes, frames per run, 0 = until STOP
//   0x10 SCAN      RW  2 bytes, clock cycles per pixel
//   0x14 FRAMECNT  R   4 bytes, frames completed in the current run
//   0x18 DROPCNT   R   4 bytes, pixel words dropped by full FIFOs
// Multi-byte registers are big-endian (lowest address = most significant byte).
// START, STOP and CLEAR are one-cycle pulses issued with the acknowledge.
module rbcp_regs
  import soi_daq_pkg::*;
#(
  parameter logic [4:0]       RST_N_CH_ACT     = DEF_N_CH_ACT,
  parameter logic [CNT_W-1:0] RST_INTEG_CYCLES = DEF_INTEG_CYCLES,
  parameter logic [CNT_W-1:0] RST_PIX_PER_CH   = DEF_PIX_PER_CH,
  parameter logic [15:0]      RST_SCAN_CYCLES  = DEF_SCAN_CYCLES,
  parameter logic [CNT_W-1:0] RST_N_FRAMES     = DEF_N_FRAMES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rbcp_act_i,
  input  logic [31:0]      rbcp_addr_i,
  input  logic             rbcp_we_i,
  input  logic [7:0]       rbcp_wd_i,
  input  logic             rbcp_re_i,
  output logic             rbcp_ack_o,
  output logic [7:0]       rbcp_rd_o,
  output run_cfg_t         cfg_o,
  output logic             start_o,
  output logic             stop_o,
  output logic             clear_o,
  input  logic [3:0]       status_i,
  input  logic [CNT_W-1:0] frame_cnt_i,
  input  logic [CNT_W-1:0] drop_cnt_i
);

  wire        hit = (rbcp_addr_i[31:8] == '0);
  wire [7:0]  a   = rbcp_addr_i[7:0];

  wire [5:0]  wa  = a[7:2];   // 32-bit register slot
  wire [4:0]  sh  = {~a[1:0], 3'b000};  // big-endian byte offset within the slot

  function automatic logic [7:0] be_byte(logic [31:0] v, logic [4:0] s);
    return v[s +: 8];
  endfunction

  logic [7:0] rdata;
  always_comb begin
    rdata = '0;
    if (hit) begin
      if (a == REG_STATUS)              rdata = {4'b0, status_i};
      else if (a == REG_N_CH)           rdata = {3'b0, cfg_o.n_ch_act};
      else if (wa == REG_INTEG[7:2])    rdata = be_byte(cfg_o.integ_cycles, sh);
      else if (wa == REG_PIX[7:2])      rdata = be_byte(cfg_o.pix_per_ch, sh);
      else if (wa == REG_NFRAMES[7:2])  rdata = be_byte(cfg_o.n_frames, sh);
      else if (a == REG_SCAN)           rdata = cfg_o.scan_cycles[15:8];
      else if (a == REG_SCAN + 8'd1)    rdata = cfg_o.scan_cycles[7:0];
      else if (wa == REG_FRAMECNT[7:2]) rdata = be_byte(frame_cnt_i, sh);
      else if (wa == REG_DROPCNT[7:2])  rdata = be_byte(drop_cnt_i, sh);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_o.n_ch_act     <= RST_N_CH_ACT;
      cfg_o.integ_cycles <= RST_INTEG_CYCLES;
      cfg_o.pix_per_ch   <= RST_PIX_PER_CH;
      cfg_o.scan_cycles  <= RST_SCAN_CYCLES;
      cfg_o.n_frames     <= RST_N_FRAMES;
      rbcp_ack_o <= 1'b0;
      rbcp_rd_o  <= '0;
      start_o    <= 1'b0;
      stop_o     <= 1'b0;
      clear_o    <= 1'b0;
    end else begin
      rbcp_ack_o <= rbcp_act_i && (rbcp_we_i || rbcp_re_i);
      start_o    <= 1'b0;
      stop_o     <= 1'b0;
      clear_o    <= 1'b0;
      if (rbcp_act_i && rbcp_re_i) rbcp_rd_o <= rdata;
      if (rbcp_act_i && rbcp_we_i && hit) begin
        if (a == REG_CTRL) begin
          start_o <= rbcp_wd_i[0];
          stop_o  <= rbcp_wd_i[1];
          clear_o <= rbcp_wd_i[2];
        end else if (a == REG_N_CH) begin
          cfg_o.n_ch_act <= (rbcp_wd_i == 8'd0) ? 5'd1 :
                            (rbcp_wd_i > 8'(MAX_CH)) ? 5'(MAX_CH) : rbcp_wd_i[4:0];
        end
        else if (wa == REG_INTEG[7:2])   cfg_o.integ_cycles[sh +: 8] <= rbcp_wd_i;
        else if (wa == REG_PIX[7:2])     cfg_o.pix_per_ch[sh +: 8]   <= rbcp_wd_i;
        else if (wa == REG_NFRAMES[7:2]) cfg_o.n_frames[sh +: 8]     <= rbcp_wd_i;
        else if (a == REG_SCAN)          cfg_o.scan_cycles[15:8]     <= rbcp_wd_i;
        else if (a == REG_SCAN + 8'd1)   cfg_o.scan_cycles[7:0]      <= rbcp_wd_i;
      end
    end
  end

  one_access: assert property (@(posedge clk) disable iff (!rst_n) !(rbcp_we_i && rbcp_re_i))
    else $error("rbcp_regs: read and write in the same cycle");

endmodule
