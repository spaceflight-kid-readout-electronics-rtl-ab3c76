// kid_pkg: types and constants shared by the KID readout firmware.
//
// The readout is a frequency-multiplexed tone comb: each tone (one per
// detector) sits in one bin of a 1024-point polyphase filterbank and is
// fine-tuned inside that bin by its own numerically controlled oscillator.
// This package holds the configuration-write bundle that every block
// decodes, the TOD (time-ordered data) record the chain emits, and the
// register map. The 1024-bin filterbank, the 1008-detector chain size (held in
// 1024 tone slots), the 16-bit phase accumulator and the 12-bit converters follow the paper; the register map,
// the data widths inside the chain and the record layout are this design's
// own choices.
package kid_pkg;

  // Converter sample width (both DAC and ADC are 12-bit parts).
  localparam int unsigned CONV_W   = 12;
  // Width of one complex component of a filterbank bin sample.
  localparam int unsigned BIN_W    = 24;
  // Width of one TOD component (I or Q) after accumulation.
  localparam int unsigned TOD_W    = 32;
  // NCO phase accumulator width.
  localparam int unsigned PHASE_W  = 16;
  // Width of a sine/cosine sample from the shared quarter-wave table.
  localparam int unsigned TRIG_W   = 16;

  // Configuration write: one register write per cycle from the control
  // processor. Each block decodes its own address range.
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Tone slots per chain: 1008 detectors plus blind tones fit in 1024.
  localparam int unsigned TONE_W   = 10;

  // Register map (word addresses).
  localparam logic [15:0] REG_GL_THR   = 16'h0080; // glitch threshold
  localparam logic [15:0] REG_GL_HOLD  = 16'h0081; // samples blanked after a glitch
  localparam logic [15:0] REG_GL_TPL   = 16'h0088; // + tap: matched-filter template (Q1.15)
  localparam logic [15:0] REG_RS_STEP  = 16'h0090; // resampler step, 16.16 input samples
  localparam logic [15:0] REG_NCO_CLR  = 16'h0091; // any write: zero all NCO phases
  localparam logic [15:0] REG_SYN_COEF = 16'h1000; // + index: synthesis PFB window
  localparam logic [15:0] REG_ANA_COEF = 16'h2000; // + index: analysis PFB window
  localparam logic [15:0] REG_FTW      = 16'h4000; // + tone: signed 16-bit tuning word
  localparam logic [15:0] REG_PHOFS    = 16'h4400; // + tone: 16-bit start phase
  localparam logic [15:0] REG_AMP      = 16'h4800; // + tone: signed 16-bit amplitude
  localparam logic [15:0] REG_BIN      = 16'h4C00; // + tone: filterbank bin index

  // Complex sample of a filterbank bin.
  typedef struct packed {
    logic signed [BIN_W-1:0] re;
    logic signed [BIN_W-1:0] im;
  } cbin_t;

  // One NCO output: the unit phasor of one tone at one bin-rate instant.
  typedef struct packed {
    logic                      valid;
    logic [TONE_W-1:0]         tone;
    logic signed [TRIG_W-1:0]  c;     // cos, Q1.15
    logic signed [TRIG_W-1:0]  s;     // sin, Q1.15
  } nco_t;

  // One complex sample tagged with the tone it belongs to.
  typedef struct packed {
    logic              valid;
    logic [TONE_W-1:0] tone;
    cbin_t             d;
  } tone_smp_t;

  // One TOD record: one tone's I and Q at one output instant.
  typedef struct packed {
    logic                    valid;
    logic [TONE_W-1:0]       tone;
    logic                    glitch;   // sample was replaced by the glitch remover
    logic signed [TOD_W-1:0] i;
    logic signed [TOD_W-1:0] q;
  } tod_t;

  // Bit-reverse the low `bits` bits of `v`.
  function automatic logic [15:0] bitrev(input logic [15:0] v, input int bits);
    logic [15:0] r;
    r = '0;
    for (int b = 0; b < 16; b++)
      if (b < bits) r[bits-1-b] = v[b];
    return r;
  endfunction

endpackage
