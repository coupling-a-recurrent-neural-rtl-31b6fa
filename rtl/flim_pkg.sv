// flim_pkg -- constants, types and fixed-point arithmetic shared by the
// real-time fluorescence lifetime (FLI) pipeline.
//
// Number format. Weights and activations are 16-bit signed fixed point
// (the 16-bit width follows the quantization study that accompanies the
// design; the split into 4 integer and 12 fraction bits, Q3.12, is this
// design's choice). Products are accumulated at full precision in 48 bits
// and brought back to Q3.12 with convergent rounding (round half to even),
// the rounding the quantization study found to track floating point,
// followed by saturation.
//
// Activations. Sigmoid is a four-segment piecewise-linear curve built from
// shifts and adds (the PLAN approximation); tanh(x) = 2*sigmoid(2x) - 1.
// The design only states that the activations are approximated; the
// particular curve is this design's choice.
//
// Sensor geometry. 32x32 pixels split into four computation units of
// 32x8 pixels each; pixel id = row*32 + col, so the two upper id bits
// select the unit and the lower eight bits are the address inside it.
//
// Configuration address map (16-bit word address, 16-bit data), written
// through the cfg_wr_t bus that reaches every block holding coefficients:
//   0x0000-0x03FF  per-pixel timestamp offset (TDC codes)
//   0x0400         timestamp gain, Q8.8 (x = corrected_code*gain/256 in Q3.12)
//   0x1000+g*H+j   GRU input weight  W_i{r,z,n}[j], g = 0 (r), 1 (z), 2 (n)
//   0x1100+g*H+j   GRU input bias    b_i{r,z,n}[j]
//   0x1200+g*H+j   GRU hidden bias   b_h{r,z,n}[j]
//   0x2000+(g*H+j)*H+k  GRU recurrent weight W_h{r,z,n}[j][k]
//   0x3000+i*H+k   FCNN layer-1 weight W1[i][k]
//   0x3400+i       FCNN layer-1 bias   b1[i]
//   0x3500+i       FCNN layer-2 weight W2[i]
//   0x3600         FCNN layer-2 bias   b2
package flim_pkg;

  localparam int DATA_W  = 16;   // weight / activation width
  localparam int FRAC    = 12;   // fraction bits of Q3.12
  localparam int ACC_W   = 48;   // accumulator width
  localparam int TS_W    = 12;   // TDC timestamp code width (50 ps LSB)
  localparam int PIX_ID_W = 10;  // 32x32 sensor pixel id
  localparam int LOCAL_AW = 8;   // pixel address inside one unit (32x8)
  localparam int COUNT_W = 8;    // saturating per-pixel photon count
  localparam int N_UNITS = 4;    // computation units
  localparam int N_TDC   = 128;  // TDC lanes of the sensor (32x4)

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam fx_t FX_MAX = fx_t'((1 << (DATA_W-1)) - 1);
  localparam fx_t FX_MIN = fx_t'(-(1 << (DATA_W-1)));

  // configuration bus
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [15:0] data;
  } cfg_wr_t;

  localparam logic [15:0] CFG_OFFSET_BASE = 16'h0000;
  localparam logic [15:0] CFG_GAIN        = 16'h0400;
  localparam logic [15:0] CFG_WIH_BASE    = 16'h1000;
  localparam logic [15:0] CFG_BIH_BASE    = 16'h1100;
  localparam logic [15:0] CFG_BHH_BASE    = 16'h1200;
  localparam logic [15:0] CFG_WHH_BASE    = 16'h2000;
  localparam logic [15:0] CFG_W1_BASE     = 16'h3000;
  localparam logic [15:0] CFG_B1_BASE     = 16'h3400;
  localparam logic [15:0] CFG_W2_BASE     = 16'h3500;
  localparam logic [15:0] CFG_B2          = 16'h3600;

  // one timestamp as delivered by a TDC lane
  typedef struct packed {
    logic [PIX_ID_W-1:0] pixel;
    logic [TS_W-1:0]     ts;
  } tdc_word_t;

  // one corrected photon event for a computation unit
  typedef struct packed {
    logic [LOCAL_AW-1:0] pixel;
    fx_t                 x;
  } photon_t;

  // lifetime result of one pixel inside a unit
  typedef struct packed {
    logic [LOCAL_AW-1:0] pixel;
    logic [COUNT_W-1:0]  count;
    fx_t                 lifetime;
  } local_result_t;

  // lifetime result with the sensor-wide pixel id, as sent to the host
  typedef struct packed {
    logic [PIX_ID_W-1:0] pixel;
    logic [COUNT_W-1:0]  count;
    fx_t                 lifetime;
  } result_t;

  // saturate an accumulator-width integer to fx_t
  function automatic fx_t sat_fx(acc_t a);
    if (a > acc_t'(FX_MAX)) return FX_MAX;
    if (a < acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(a);
  endfunction

  // convergent rounding of a value with 2*FRAC fraction bits to Q3.12
  function automatic fx_t round_fx(acc_t a);
    acc_t q, rem;
    q   = a >>> FRAC;
    rem = a - (q <<< FRAC);
    if (rem > acc_t'(1 << (FRAC-1)) || (rem == acc_t'(1 << (FRAC-1)) && q[0]))
      q = q + acc_t'(1);
    return sat_fx(q);
  endfunction

  // Q3.12 x Q3.12 -> Q3.12
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    return round_fx(acc_t'(a) * acc_t'(b));
  endfunction

  // saturating add / subtract
  function automatic fx_t fx_add(fx_t a, fx_t b);
    return sat_fx(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic fx_t fx_sub(fx_t a, fx_t b);
    return sat_fx(acc_t'(a) - acc_t'(b));
  endfunction

  // piecewise-linear sigmoid on an 18-bit Q5.12 argument
  function automatic fx_t sigmoid_core(logic signed [17:0] x);
    logic [17:0] ax;
    logic [17:0] y;
    ax = x[17] ? 18'(-x) : 18'(x);
    if (ax >= 18'd20480)      y = 18'd4096;                  // |x| >= 5
    else if (ax >= 18'd9728)  y = (ax >> 5) + 18'd3456;      // 2.375 <= |x| < 5
    else if (ax >= 18'd4096)  y = (ax >> 3) + 18'd2560;      // 1 <= |x| < 2.375
    else                      y = (ax >> 2) + 18'd2048;      // |x| < 1
    if (x[17]) y = 18'd4096 - y;
    return fx_t'(y);
  endfunction

  function automatic fx_t sigmoid_pwl(fx_t x);
    return sigmoid_core(18'(x));
  endfunction

  function automatic fx_t tanh_pwl(fx_t x);
    logic signed [17:0] x2;
    x2 = 18'(x) <<< 1;
    return fx_t'((18'(sigmoid_core(x2)) <<< 1) - 18'sd4096);
  endfunction

endpackage
