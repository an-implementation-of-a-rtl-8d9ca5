// Shared widths, number formats, types and the control register map of the
// Goertzel filter bank channelizer.
//
// Number formats (all two's complement):
//   ADC samples          16 bit integers                 (ADC_W)
//   DDC outputs          18 bit integers, same LSB as ADC (DDC_W)
//   window coefficients  18 bit, 16 fractional bits       (WIN_W, WIN_FRAC)
//   kg = 2cos(alpha)     18 bit, 16 fractional bits       (KG_W, KG_FRAC)
//   a, b, c, d           18 bit, 16 fractional bits       (COEF_W, COEF_FRAC)
//   CFIR taps            18 bit, 17 fractional bits       (CFIR_W, CFIR_FRAC)
//   Goertzel state w1/w2 32 bit, holding w * 2^(XF - asf) (GF_W, XF)
// The 16/18/32 bit data widths of ADC, DDC and Goertzel filter follow the
// paper's data-width table; the fractional splits are this design's choice.
package gfb_pkg;

  localparam int ADC_W     = 16;
  localparam int DDC_W     = 18;
  localparam int GF_W      = 32;
  localparam int WIN_W     = 18;
  localparam int WIN_FRAC  = 16;
  localparam int KG_W      = 18;
  localparam int KG_FRAC   = 16;
  localparam int COEF_W    = 18;
  localparam int COEF_FRAC = 16;
  localparam int CFIR_W    = 18;
  localparam int CFIR_FRAC = 17;
  localparam int ACF_W     = 18;
  // Fractional bits given to the windowed input inside the Goertzel adder.
  localparam int XF        = 14;
  // Decimation ratio of the firmware DDC = clocks per DDC output sample.
  localparam int R_DEC     = 8;
  // DDCs served by one GF core; each gives an I and a Q component.
  localparam int DDC_PER_CORE = 4;
  localparam int TDM       = 2 * DDC_PER_CORE;   // 8 real streams per core
  // GF cores served by one non-iterative X[k] unit.
  localparam int CORES_PER_XK = 8;

  typedef struct packed {
    logic signed [ADC_W-1:0] i;
    logic signed [ADC_W-1:0] q;
  } adc_iq_t;

  typedef struct packed {
    logic signed [DDC_W-1:0] i;
    logic signed [DDC_W-1:0] q;
  } ddc_iq_t;

  // One X[k] result of one real component (I or Q stream of a DDC).
  // In polar mode re carries |X| and im the phase (2^32 = one turn).
  typedef struct packed {
    logic [3:0]              core;   // core index inside its X[k] unit
    logic [2:0]              slot;   // TDM slot: {ddc (2 bit), 0 = I / 1 = Q}
    logic signed [GF_W-1:0]  re;
    logic signed [GF_W-1:0]  im;
  } xk_result_t;

  // Control register map (word addresses of the write port).
  localparam logic [15:0] REG_CTRL      = 16'h0000; // bit0: enable
  localparam logic [15:0] REG_WIN_SIZE  = 16'h0001; // window length N
  localparam logic [15:0] REG_ASF       = 16'h0002; // arithmetic shift of w1/w2
  localparam logic [15:0] REG_ACF       = 16'h0003; // amplitude correction factor
  localparam logic [15:0] REG_OUT_SHIFT = 16'h0004; // right shift after the ACF
  localparam logic [15:0] REG_KG_UPDATE = 16'h0005; // write: move kg SRLs to sync buffers
  localparam logic [15:0] REG_NCO_BASE  = 16'h0100; // + ddc    : NCO tuning word
  localparam logic [15:0] REG_CFIR_BASE = 16'h0200; // + tap    : CFIR coefficient
  localparam logic [15:0] REG_KG_BASE   = 16'h0400; // + core   : shift one kg into that core
  localparam logic [15:0] REG_WIN_BASE  = 16'h1000; // + n      : window coefficient w[n]
  localparam logic [15:0] REG_COEF_BASE = 16'h4000; // + {unit, sel, bin}: a/b/c/d RAMs

  // Saturate a wide signed value to OW bits.
  function automatic logic signed [63:0] sat(input logic signed [127:0] v, input int ow);
    logic signed [127:0] hi, lo;
    hi = (128'sd1 <<< (ow - 1)) - 1;
    lo = -(128'sd1 <<< (ow - 1));
    if (v > hi)      return 64'(hi);
    else if (v < lo) return 64'(lo);
    else             return 64'(v);
  endfunction

endpackage
