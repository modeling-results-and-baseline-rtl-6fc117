// mkid_pkg: types, constants and arithmetic helpers shared by the MKID readout datapath.
//
// A complex baseband sample is a packed pair of signed 16-bit numbers (cplx_t); every block
// from the ADC input to the low-pass filter passes samples in this form. Trigonometric
// values come from one quarter-wave cosine table of QTAB_N = 1024 entries (Q1.15), from which
// sincos() builds the sine and cosine of a 12-bit phase (4096 steps per turn). That table
// serves both the FFT twiddle factors (so the FFT is limited to 4096 points, the size the
// design uses) and the per-channel oscillators of the down-converter. The table is computed
// at elaboration from cos(2*pi*k/4096). The 16-bit sample width, Q1.15 format and rounding
// rules are this design's own choices; the paper does not give word widths.
package mkid_pkg;

  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned QTAB_N   = 1024;           // quarter of a 4096-step turn
  localparam int unsigned PH_W     = 12;             // phase bits of sincos()

  typedef logic signed [SAMPLE_W-1:0] samp_t;

  typedef struct packed {
    samp_t re;
    samp_t im;
  } cplx_t;

  typedef struct packed {
    samp_t c;   // cosine
    samp_t s;   // sine
  } sincos_t;

  // Regions of the host configuration space of the top level.
  typedef enum logic [2:0] {
    CFG_CTRL     = 3'd0,   // addr 0: DAC loop length, addr 1: DAC run
    CFG_DAC_LUT  = 3'd1,   // DAC waveform samples
    CFG_PFB_COEF = 3'd2,   // polyphase window coefficients
    CFG_CHAN_MAP = 3'd3,   // channel -> FFT bin
    CFG_DDS_INC  = 3'd4    // per-channel oscillator phase increment
  } cfg_region_e;

  typedef samp_t qtab_t [QTAB_N];

  function automatic qtab_t gen_qcos();
    qtab_t t;
    for (int k = 0; k < int'(QTAB_N); k++)
      t[k] = samp_t'($rtoi($floor(32767.0 * $cos(6.283185307179586 * k / 4096.0) + 0.5)));
    return t;
  endfunction

  localparam qtab_t QCOS = gen_qcos();

  // cos and sin of 2*pi*ph/4096, Q1.15.
  function automatic sincos_t sincos(logic [PH_W-1:0] ph);
    logic [9:0] r;
    samp_t c, s;
    sincos_t o;
    r = ph[9:0];
    c = QCOS[r];
    s = (r == 10'd0) ? samp_t'(0) : QCOS[10'(11'd1024 - 11'(r))];
    unique case (ph[11:10])
      2'd0: begin o.c = c;  o.s = s;  end
      2'd1: begin o.c = -s; o.s = c;  end
      2'd2: begin o.c = -c; o.s = -s; end
      default: begin o.c = s; o.s = -c; end
    endcase
    return o;
  endfunction

  // Round a Q.15-scaled wide value to 16 bits with saturation.
  function automatic samp_t round_sat15(logic signed [33:0] v);
    logic signed [33:0] r;
    r = (v + 34'sd16384) >>> 15;
    if (r > 34'sd32767)       return samp_t'(16'sh7fff);
    else if (r < -34'sd32768) return samp_t'(16'sh8000);
    else                      return samp_t'(r);
  endfunction

  // a * (wr + j*wi), with w in Q1.15.
  function automatic cplx_t cmul_q15(cplx_t a, samp_t wr, samp_t wi);
    cplx_t o;
    o.re = round_sat15(34'(a.re) * 34'(wr) - 34'(a.im) * 34'(wi));
    o.im = round_sat15(34'(a.re) * 34'(wi) + 34'(a.im) * 34'(wr));
    return o;
  endfunction

  function automatic samp_t sat16(logic signed [31:0] v);
    if (v > 32'sd32767)       return samp_t'(16'sh7fff);
    else if (v < -32'sd32768) return samp_t'(16'sh8000);
    else                      return samp_t'(v);
  endfunction

endpackage
