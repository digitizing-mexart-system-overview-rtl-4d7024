// mexart_pkg -- constants and types shared by the digitiser firmware.
//
// One FPGA handles 16 digitised signals. Each signal is a 100 MSPS stream
// cut into 4096-sample frames; a polyphase filter bank turns every frame into
// 2048 channels of 24.4 kHz, of which 512 contiguous channels are kept and sent
// to the network as 8+8-bit complex values. These numbers follow the paper.
// Widths of internal words (16-bit samples, 18-bit coefficients, the 64-bit
// packet word) and the register map are choices of this design.
package mexart_pkg;

  // Sizes taken from the paper
  localparam int unsigned NUM_INPUTS = 16;    // signals per FPGA
  localparam int unsigned FRAME_LEN  = 4096;  // samples per timestamped frame
  localparam int unsigned NUM_CHANS  = 2048;  // channels out of the PFB
  localparam int unsigned SEL_CHANS  = 512;   // channels kept by channel select

  // Design choices
  localparam int unsigned SAMPLE_W   = 16;    // signed sample from the DDC
  localparam int unsigned CHAN_W     = 8;     // signed re / im after requantisation
  localparam int unsigned POWER_W    = 32;    // integrated power per channel

  // Frame timestamp: seconds since epoch (loaded by the host, advanced by
  // the PPS) and the sample offset of the frame's first sample within that
  // second, plus a free-running frame counter.
  typedef struct packed {
    logic [31:0] seconds;
    logic [31:0] sample_in_sec;
    logic [31:0] frame;
  } frame_ts_t;

  // One 64-bit word of an outgoing packet stream.
  typedef struct packed {
    logic [63:0] data;
    logic        last;
  } pkt_word_t;

  // SPEAD item identifiers used in the packet headers. 0x0001..0x0004 are the
  // standard SPEAD heap items; the others are this design's own.
  localparam logic [14:0] SPEAD_ID_HEAP_CNT   = 15'h0001;
  localparam logic [14:0] SPEAD_ID_HEAP_SIZE  = 15'h0002;
  localparam logic [14:0] SPEAD_ID_HEAP_OFF   = 15'h0003;
  localparam logic [14:0] SPEAD_ID_PAYLOAD    = 15'h0004;
  localparam logic [14:0] SPEAD_ID_SECONDS    = 15'h1600;
  localparam logic [14:0] SPEAD_ID_SAMPLE_OFF = 15'h1601;
  localparam logic [14:0] SPEAD_ID_CHAN_INFO  = 15'h2002;
  localparam logic [14:0] SPEAD_ID_MODE       = 15'h3300;
  localparam int unsigned SPEAD_NITEMS        = 8;

  // Stream modes carried in the SPEAD_ID_MODE item
  localparam logic [47:0] MODE_CHANNELISED = 48'd1;
  localparam logic [47:0] MODE_SPECTRA     = 48'd2;

  function automatic logic [63:0] spead_item(logic [14:0] id, logic [47:0] value);
    return {1'b1, id, value};
  endfunction

  // Integer sine for building coefficient tables at elaboration time, so that
  // no real arithmetic is needed. sin2pi_q30(num, den) = sin(2*pi*num/den) in
  // Q2.30. The angle is folded into the first quadrant and evaluated with a
  // Taylor series to the x^19 term; the error is a few parts in 1e9.
  localparam longint Q30_ONE     = 64'sd1 << 30;
  localparam longint HALF_PI_Q30 = 64'sd1686629713;   // round(pi/2 * 2^30)

  function automatic longint sin2pi_q30(longint num, longint den);
    longint n4, q, r, x, x2, t, s;
    n4 = (4 * num) % (4 * den);
    if (n4 < 0) n4 += 4 * den;
    q = n4 / den;
    r = n4 % den;
    if (q == 1 || q == 3) r = den - r;
    x  = (HALF_PI_Q30 * r) / den;
    x2 = (x * x) >>> 30;
    t  = x;
    s  = x;
    for (int k = 1; k < 10; k++) begin
      t = -((t * x2) >>> 30) / longint'((2 * k) * (2 * k + 1));
      s += t;
    end
    return (q >= 2) ? -s : s;
  endfunction

  // cos(2*pi*num/den) in Q2.30
  function automatic longint cos2pi_q30(longint num, longint den);
    return sin2pi_q30(4 * num + den, 4 * den);
  endfunction

endpackage
