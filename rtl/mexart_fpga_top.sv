// mexart_fpga_top -- firmware of one digitiser FPGA: 16 signals from the ADC
// link to SPEAD packets for the Ethernet core.
//
// Data path (Fig. 2 of the paper): the timing unit frames the samples into
// 4096-sample frames and timestamps them from the epoch and the PPS; the
// channeliser (polyphase FIR + 4096-point FFT) turns each frame into 2048
// channels; channel select keeps 512 contiguous channels as 8+8-bit complex
// values; one SPEAD formatter packs them for the network, while the power
// spectra generator integrates their power and a second formatter packs the
// spectra; a packet mux merges both streams for the 10G UDP Ethernet core.
// Beside the main path the RMS power meter and the ADC snapshot watch the
// framed time-domain samples, and a register bank gives the host access to
// all settings and readings.
//
// Outside this module: the AD9680 ADCs with their down-converters and the
// JESD204B receiver deliver adc_data (one signed sample per input per valid
// cycle); the UDP/Ethernet core and QSFP take eth_word. One clock runs the
// whole design at the sample rate (100 MHz for 100 MSPS).
module mexart_fpga_top
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN      = NUM_INPUTS,
  parameter int unsigned FRAME     = FRAME_LEN,
  parameter int unsigned TAPS      = 4,
  parameter int unsigned SEL       = SEL_CHANS,
  parameter int unsigned CPP_DATA  = 32,
  parameter int unsigned CPP_SPEC  = 16,
  parameter int unsigned FIFO_D    = 512,
  parameter int unsigned SNAP_D    = 1024,
  parameter logic [15:0] FIRST_ANT = 16'd0
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       pps,
  // from the JESD204B receiver
  input  logic                       adc_valid,
  input  logic signed [SAMPLE_W-1:0] adc_data [N_IN],
  // host register bus
  input  logic                       reg_wr,
  input  logic                       reg_rd,
  input  logic [15:0]                reg_addr,
  input  logic [31:0]                reg_wdata,
  output logic [31:0]                reg_rdata,
  output logic                       reg_rd_valid,
  // to the 10G UDP Ethernet core
  output pkt_word_t                  eth_word,
  output logic                       eth_valid,
  input  logic                       eth_ready
);
  localparam int unsigned NCH   = FRAME / 2;
  localparam int unsigned CHW   = $clog2(NCH);
  localparam int unsigned FIR_W = SAMPLE_W + 2;
  localparam int unsigned FFT_W = FIR_W + $clog2(FRAME) + 1;

  // ---- registers ----
  logic        arm, snap_trigger;
  logic [31:0] epoch_sec;
  logic [CHW-1:0] chan_start;
  logic [4:0]  shift, rms_win_log2;
  logic [15:0] int_frames;
  logic [31:0] counters [8];
  logic [31:0] rms_windows;
  logic [SAMPLE_W-1:0]   rms   [N_IN];
  logic [2*SAMPLE_W-1:0] power [N_IN];
  logic [$clog2(SNAP_D)-1:0] snap_sample;
  logic [$clog2(N_IN)-1:0]   snap_input;
  logic signed [SAMPLE_W-1:0] snap_data;
  logic        synced, snap_done, snap_busy, rms_update;
  frame_ts_t   snap_ts;

  // ---- timing unit ----
  logic                       t_valid, t_sof;
  logic signed [SAMPLE_W-1:0] t_data [N_IN];
  frame_ts_t                  t_ts;
  logic [31:0]                pps_count;

  timing_unit #(.N_IN(N_IN), .FRAME(FRAME)) u_timing (
    .clk, .rst, .pps, .arm, .epoch_sec,
    .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(t_valid), .out_sof(t_sof), .out_data(t_data), .out_ts(t_ts),
    .synced, .pps_count
  );

  rms_power_meter #(.N_IN(N_IN)) u_rms (
    .clk, .rst, .win_log2(rms_win_log2), .in_valid(t_valid), .in_data(t_data),
    .out_power(power), .out_rms(rms), .out_update(rms_update)
  );

  adc_snapshot #(.N_IN(N_IN), .DEPTH(SNAP_D)) u_snap (
    .clk, .rst, .trigger(snap_trigger),
    .in_valid(t_valid), .in_sof(t_sof), .in_ts(t_ts), .in_data(t_data),
    .busy(snap_busy), .done(snap_done), .snap_ts,
    .rd_sample(snap_sample), .rd_input(snap_input), .rd_data(snap_data)
  );

  // ---- channeliser and channel select ----
  logic                    c_valid, c_sof;
  logic [CHW-1:0]          c_chan;
  frame_ts_t               c_ts;
  logic signed [FFT_W-1:0] c_re [N_IN], c_im [N_IN];

  channelizer #(.N_IN(N_IN), .N(FRAME), .TAPS(TAPS), .FIR_W(FIR_W), .W(FFT_W)) u_chan (
    .clk, .rst, .in_valid(t_valid), .in_sof(t_sof), .in_ts(t_ts), .in_data(t_data),
    .out_valid(c_valid), .out_sof(c_sof), .out_chan(c_chan), .out_ts(c_ts),
    .out_re(c_re), .out_im(c_im)
  );

  logic                      s_valid, s_sof;
  logic [CHW-1:0]            s_chan;
  frame_ts_t                 s_ts;
  logic signed [CHAN_W-1:0]  s_re [N_IN], s_im [N_IN];
  logic [31:0]               sat_count;

  channel_select #(.N_IN(N_IN), .NCH(NCH), .SEL(SEL), .IW(FFT_W)) u_sel (
    .clk, .rst, .chan_start, .shift,
    .in_valid(c_valid), .in_sof(c_sof), .in_chan(c_chan), .in_ts(c_ts),
    .in_re(c_re), .in_im(c_im),
    .out_valid(s_valid), .out_sof(s_sof), .out_chan(s_chan), .out_ts(s_ts),
    .out_re(s_re), .out_im(s_im), .sat_count
  );

  // ---- power spectra ----
  logic                 p_valid, p_sof;
  logic [CHW-1:0]       p_chan;
  frame_ts_t            p_ts;
  logic [POWER_W-1:0]   p_pow [N_IN];
  logic [31:0]          spectra_count;

  power_spectra_generator #(.N_IN(N_IN), .NCH(NCH), .SEL(SEL)) u_psg (
    .clk, .rst, .int_frames,
    .in_valid(s_valid), .in_sof(s_sof), .in_chan(s_chan), .in_ts(s_ts),
    .in_re(s_re), .in_im(s_im),
    .out_valid(p_valid), .out_sof(p_sof), .out_chan(p_chan), .out_ts(p_ts),
    .out_pow(p_pow), .spectra_count
  );

  // ---- SPEAD formatters (input 0 in the most significant bits) ----
  logic [N_IN*2*CHAN_W-1:0] s_packed;
  logic [N_IN*POWER_W-1:0]  p_packed;
  always_comb
    for (int l = 0; l < N_IN; l++) begin
      s_packed[(N_IN-1-l)*2*CHAN_W +: 2*CHAN_W] = {s_re[l], s_im[l]};
      p_packed[(N_IN-1-l)*POWER_W +: POWER_W]   = p_pow[l];
    end

  pkt_word_t   f_word  [2];
  logic        f_valid [2], f_ready [2];
  logic [31:0] f_pkts [2], f_drops [2];

  spead_formatter #(.N_IN(N_IN), .NCH(NCH), .EW(2*CHAN_W), .CPP(CPP_DATA), .DEPTH(FIFO_D),
                    .MODE(MODE_CHANNELISED), .FIRST_ANT(FIRST_ANT)) u_fmt_data (
    .clk, .rst, .in_valid(s_valid), .in_sof(s_sof), .in_chan(s_chan), .in_ts(s_ts),
    .in_data(s_packed), .out_word(f_word[0]), .out_valid(f_valid[0]), .out_ready(f_ready[0]),
    .pkt_count(f_pkts[0]), .drop_count(f_drops[0])
  );

  spead_formatter #(.N_IN(N_IN), .NCH(NCH), .EW(POWER_W), .CPP(CPP_SPEC), .DEPTH(FIFO_D),
                    .MODE(MODE_SPECTRA), .FIRST_ANT(FIRST_ANT)) u_fmt_spec (
    .clk, .rst, .in_valid(p_valid), .in_sof(p_sof), .in_chan(p_chan), .in_ts(p_ts),
    .in_data(p_packed), .out_word(f_word[1]), .out_valid(f_valid[1]), .out_ready(f_ready[1]),
    .pkt_count(f_pkts[1]), .drop_count(f_drops[1])
  );

  packet_mux u_mux (
    .clk, .rst, .in_word(f_word), .in_valid(f_valid), .in_ready(f_ready),
    .out_word(eth_word), .out_valid(eth_valid), .out_ready(eth_ready)
  );

  // ---- register bank ----
  assign counters[0] = pps_count;
  assign counters[1] = sat_count;
  assign counters[2] = f_pkts[0];
  assign counters[3] = f_drops[0];
  assign counters[4] = f_pkts[1];
  assign counters[5] = f_drops[1];
  assign counters[6] = spectra_count;
  assign counters[7] = rms_windows;

  always_ff @(posedge clk) begin
    if (rst) rms_windows <= '0;
    else if (rms_update) rms_windows <= rms_windows + 1;
  end

  register_bank #(.N_IN(N_IN), .NCH(NCH), .SNAP_D(SNAP_D)) u_regs (
    .clk, .rst, .wr(reg_wr), .rd(reg_rd), .addr(reg_addr), .wdata(reg_wdata),
    .rdata(reg_rdata), .rd_valid(reg_rd_valid),
    .arm, .snap_trigger, .epoch_sec, .chan_start, .shift, .int_frames, .rms_win_log2,
    .synced, .snap_done, .snap_busy, .counters, .rms, .power,
    .snap_sample, .snap_input, .snap_data, .snap_ts
  );
endmodule
