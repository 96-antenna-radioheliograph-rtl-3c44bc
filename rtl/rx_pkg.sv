// rx_pkg: widths and constants shared by the blocks of the four-antenna
// digital receiver module.
//
// Numbers that come from the published receiver description: four antennas
// per module, 12-bit ADC samples, a 64th-order (65-tap) band-pass FIR,
// 32-bit polyphase-filter output, 3-bit I and Q samples at 25 MHz and
// 8b/10b line coding. Everything else here (sample clock of 100 MHz,
// decimation by 4, 16-bit internal datapath, 256-sample delay memory,
// 32-bit NCO phase) is a choice of this implementation; see README.md.
package rx_pkg;

  // ---- numbers given by the receiver description ----
  localparam int unsigned N_ANT     = 4;   // antennas per receiver module
  localparam int unsigned ADC_W     = 12;  // ADC resolution
  localparam int unsigned BPF_TAPS  = 65;  // 64th-order band-pass FIR
  localparam int unsigned POLY_W    = 32;  // polyphase FIR output width
  localparam int unsigned Q_W       = 3;   // requantised I or Q sample

  // ---- implementation choices ----
  localparam int unsigned DECIM     = 4;   // 100 MHz sample clock -> 25 MHz
  localparam int unsigned COEF_W    = 16;  // FIR coefficients, Q1.15
  localparam int unsigned DATA_W    = 16;  // band-pass / delay / mixer samples
  localparam int unsigned LPF_TAPS  = 64;  // polyphase low-pass, 16 per branch
  localparam int unsigned DLY_DEPTH = 256; // whole-sample delay range
  localparam int unsigned PHASE_W   = 32;  // NCO phase accumulator
  localparam int unsigned TRIG_W    = 16;  // NCO cos/sin amplitude
  localparam int unsigned WORD_W    = 32;  // serializer word: 8 nibbles
  localparam int unsigned SYM_W     = 40;  // four 10-bit code groups

  // 8b/10b control character used for word alignment: K28.5
  localparam logic [7:0] K28_5 = 8'hBC;

  // One serializer word and its per-byte control flags
  typedef struct packed {
    logic [WORD_W-1:0] data;
    logic [3:0]        is_k;   // byte b is a control character
  } tx_word_t;

  // Saturate a signed value to 'w' bits (w <= 64)
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w-1)) - 64'sd1;
    lo = -(64'sd1 <<< (w-1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
