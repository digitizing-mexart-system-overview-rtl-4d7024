// register_bank -- memory-mapped control and status registers of one FPGA.
//
// The host reaches the firmware through word-addressed reads and writes
// (32-bit data). Control registers drive the timing unit, channel select,
// power spectra generator, RMS meter and snapshot; status registers return
// counters and measurements; a window at 0x4000 reads the ADC snapshot, one
// sample of one input per word ({sample, input} in the low address bits,
// sign-extended). Writes take effect on the next cycle; a read returns its
// data with rd_valid one cycle after rd. Writing 1 to CONTROL bit 0 arms the
// PPS synchronisation, bit 1 triggers a snapshot; both bits read back 0.
//
//   0x0000 ID          "MEXA" (0x4D455841)        RO
//   0x0001 CONTROL     bit0 arm, bit1 snapshot     W, self-clearing
//   0x0002 EPOCH       seconds at the sync edge    RW
//   0x0003 CHAN_START  first selected channel      RW (reset 768)
//   0x0004 SHIFT       requantisation shift        RW (reset 12)
//   0x0005 INT_FRAMES  spectra integration length  RW (reset 1024)
//   0x0006 RMS_WIN     log2 of the RMS window      RW (reset 16)
//   0x0007 STATUS      bit0 synced, bit1 snapshot done, bit2 snapshot busy
//   0x0008..0x000F     PPS count, saturations, data packets, data drops,
//                      spectra packets, spectra drops, spectra done,
//                      RMS windows done (RO)
//   0x0010+i           RMS of input i (RO);  0x0020+i  mean power of input i
//   0x0030..0x0032     snapshot timestamp: seconds, sample in second, frame
//   0x4000+            snapshot window
//
// The paper only says that registers and memory areas are memory mapped and
// described to the host by a generated XML file; the register map, reset
// values and bus are this design's choice.
module register_bank
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN   = NUM_INPUTS,
  parameter int unsigned SW     = SAMPLE_W,
  parameter int unsigned NCH    = NUM_CHANS,
  parameter int unsigned SNAP_D = 1024
) (
  input  logic                      clk,
  input  logic                      rst,
  // host bus
  input  logic                      wr,
  input  logic                      rd,
  input  logic [15:0]               addr,
  input  logic [31:0]               wdata,
  output logic [31:0]               rdata,
  output logic                      rd_valid,
  // control
  output logic                      arm,
  output logic                      snap_trigger,
  output logic [31:0]               epoch_sec,
  output logic [$clog2(NCH)-1:0]    chan_start,
  output logic [4:0]                shift,
  output logic [15:0]               int_frames,
  output logic [4:0]                rms_win_log2,
  // status
  input  logic                      synced,
  input  logic                      snap_done,
  input  logic                      snap_busy,
  input  logic [31:0]               counters [8],
  input  logic [SW-1:0]             rms      [N_IN],
  input  logic [2*SW-1:0]           power    [N_IN],
  output logic [$clog2(SNAP_D)-1:0] snap_sample,
  output logic [$clog2(N_IN)-1:0]   snap_input,
  input  logic signed [SW-1:0]      snap_data,
  input  frame_ts_t                 snap_ts
);
  localparam int unsigned IB = $clog2(N_IN);

  assign snap_input  = addr[IB-1:0];
  assign snap_sample = addr[IB +: $clog2(SNAP_D)];

  always_ff @(posedge clk) begin
    if (rst) begin
      arm <= 1'b0; snap_trigger <= 1'b0; epoch_sec <= '0;
      chan_start <= $clog2(NCH)'(768); shift <= 5'd12; int_frames <= 16'd1024;
      rms_win_log2 <= 5'd16; rd_valid <= 1'b0; rdata <= '0;
    end else begin
      arm <= 1'b0; snap_trigger <= 1'b0;
      if (wr) begin
        unique case (addr)
          16'h0001: begin arm <= wdata[0]; snap_trigger <= wdata[1]; end
          16'h0002: epoch_sec    <= wdata;
          16'h0003: chan_start   <= wdata[$clog2(NCH)-1:0];
          16'h0004: shift        <= wdata[4:0];
          16'h0005: int_frames   <= wdata[15:0];
          16'h0006: rms_win_log2 <= wdata[4:0];
          default: ;
        endcase
      end
      rd_valid <= rd;
      if (rd) begin
        rdata <= '0;
        if (addr >= 16'h4000)
          rdata <= 32'(snap_data);
        else if (addr >= 16'h0010 && addr < 16'h0010 + 16'(N_IN))
          rdata <= 32'(rms[addr[IB-1:0]]);
        else if (addr >= 16'h0020 && addr < 16'h0020 + 16'(N_IN))
          rdata <= 32'(power[addr[IB-1:0]]);
        else if (addr >= 16'h0008 && addr <= 16'h000F)
          rdata <= counters[3'(addr[3:0] - 4'd8)];
        else
          unique case (addr)
            16'h0000: rdata <= 32'h4D455841;
            16'h0002: rdata <= epoch_sec;
            16'h0003: rdata <= 32'(chan_start);
            16'h0004: rdata <= 32'(shift);
            16'h0005: rdata <= 32'(int_frames);
            16'h0006: rdata <= 32'(rms_win_log2);
            16'h0007: rdata <= {29'd0, snap_busy, snap_done, synced};
            16'h0030: rdata <= snap_ts.seconds;
            16'h0031: rdata <= snap_ts.sample_in_sec;
            16'h0032: rdata <= snap_ts.frame;
            default:  rdata <= '0;
          endcase
      end
    end
  end
endmodule
