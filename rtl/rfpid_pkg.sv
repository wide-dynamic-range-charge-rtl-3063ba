// rfpid_pkg: widths, fixed-point formats, default settings and the runtime
// configuration record shared by the rf-reflectometry PID feedback loop.
//
// Number formats used throughout the loop:
//   * samples (ADC codes, set point, DAC codes, u): signed DATA_W-bit integers.
//     The DAC full scale is taken to be the +-1.5 V range of the control signal u
//     stated for the instrument, so one DAC code is 1.5 V / 2^15 (about 45.8 uV).
//   * PID coefficients G_P, G_I, G_D and D: signed COEF_W-bit, COEF_FRAC
//     fractional bits (Q8.16 with the defaults, range +-128).
//   * low-pass coefficient and averager reciprocal: unsigned, 16 fractional
//     bits, 1.0 = 65536.
// The default coefficient values are the operating point reported for the
// step-response measurement: G_P = 0.10, G_I = 0, G_D = 0.65, D = 0.80
// (T_F = 5 ns, T_S = 90 ns). T_S = 90 ns at 100 MS/s is read here as an
// average over 9 samples; the 5 MHz low-pass bandwidth sets the filter
// coefficient alpha = 1 - exp(-2*pi*5 MHz/100 MHz) = 0.2696.
package rfpid_pkg;

  localparam int unsigned DATA_W     = 16;  // ADC / DAC / u sample width
  localparam int unsigned ERR_W      = DATA_W + 1;
  localparam int unsigned COEF_W     = 24;  // PID coefficient width
  localparam int unsigned COEF_FRAC  = 16;  // PID coefficient fraction bits
  localparam int unsigned ALPHA_W    = 17;  // unsigned Q1.16
  localparam int unsigned RECIP_W    = 17;  // unsigned Q1.16
  localparam int unsigned AVG_LEN_W  = 8;
  localparam int unsigned CNT_W      = 32;  // pulse generator timing counters

  typedef logic signed [DATA_W-1:0]  sample_t;
  typedef logic signed [COEF_W-1:0]  coef_t;

  // G = round(value * 2^16)
  localparam coef_t GP_DEFAULT = coef_t'(6554);   // 0.10
  localparam coef_t GI_DEFAULT = coef_t'(0);      // 0
  localparam coef_t GD_DEFAULT = coef_t'(42598);  // 0.65
  localparam coef_t D_DEFAULT  = coef_t'(52429);  // 0.80

  localparam logic [ALPHA_W-1:0]   LPF_ALPHA_DEFAULT = ALPHA_W'(17668); // 0.2696
  localparam logic [AVG_LEN_W-1:0] AVG_LEN_DEFAULT   = AVG_LEN_W'(9);   // 9 x 10 ns = T_S
  localparam logic [RECIP_W-1:0]   AVG_RECIP_DEFAULT = RECIP_W'(7282);  // round(65536/9)

  // Runtime settings, written by the host between or during runs.
  typedef struct packed {
    logic                   pid_en;      // 1: loop closed, 0: u held at 0 (PID off)
    sample_t                vs;          // set point V_s in ADC codes
    coef_t                  gp;          // G_P
    coef_t                  gi;          // G_I
    coef_t                  gd;          // G_D
    coef_t                  d;           // D
    logic [ALPHA_W-1:0]     lpf_alpha;   // low-pass coefficient, 65536 = bypass
    logic [AVG_LEN_W-1:0]   avg_len;     // samples per average (0 is taken as 1)
    logic [RECIP_W-1:0]     avg_recip;   // round(65536 / avg_len)
    logic                   dist_en;     // pulse generator on
    sample_t                dist_amp;    // disturbance amplitude in DAC codes
    logic [CNT_W-1:0]       dist_delay;  // clock cycles from period start to step
    logic [CNT_W-1:0]       dist_width;  // clock cycles the step lasts
    logic [CNT_W-1:0]       dist_period; // clock cycles per trial (0 = 2^CNT_W)
  } cfg_t;

endpackage
