// ktx_pkg: widths, number formats, default coefficients and shared types of the
// KTX error-field feedback electronics (sample board and coil control board).
//
// Sizes that follow the paper: 16 Rogowski-coil paths read by two 8-channel
// 16-bit ADCs, 12-bit data into the mutual inductance correction, the
// circulant inductance matrix with entries 620, -7 and -1.67 uH, 16 DAC
// channels of 16 bits, a 40 Mbit/s RS-485 link between the boards and an SPI
// clock of up to 50 MHz.  The 200 MHz system clock, the fixed-point formats
// (Q.8 matrix entries, Q8.8 beta_R, Q.16 v, Q.12 PID coefficients), the
// 20 us control period and the RS-485 word format are this design's choices.
package ktx_pkg;

  // ---------------- sizes given by the paper ----------------
  localparam int N_PATH   = 16;  // Rogowski coils / correction paths / DACs
  localparam int ADC_CH   = 8;   // channels per ADS8528
  localparam int N_ADC    = 2;   // ADS8528 devices on the sample board
  localparam int ADC_W    = 16;  // ADS8528 resolution
  localparam int SAMPLE_W = 12;  // data width entering the correction multipliers
  localparam int DAC_W    = 16;  // DAC8831 resolution
  localparam int PATH_W   = $clog2(N_PATH);

  // ---------------- clocking (own choice, rates from the paper) ----------------
  localparam int unsigned CLK_HZ     = 200_000_000;
  localparam int unsigned RS485_BPS  = 40_000_000;           // paper: 40 Mbps
  localparam int unsigned CLKS_PER_BIT = CLK_HZ / RS485_BPS; // 5
  localparam int unsigned SCLK_HALF  = 2;                    // 200/(2*2) = 50 MHz SPI clock
  localparam int unsigned PERIOD_CYC = 4000;                 // 20 us control period

  // ---------------- fixed-point formats (own choice) ----------------
  localparam int BETA_W  = 16;  localparam int BETA_FRAC = 8;   // beta_R, Q8.8
  localparam int ALPHA_W = 16;                                  // alpha_0, sample LSBs
  localparam int Y_W     = 22;                                  // U_in*beta_R + alpha_0
  localparam int M_W     = 20;  localparam int M_FRAC    = 8;   // matrix entries, Q12.8
  localparam int V_W     = 18;  localparam int V_FRAC    = 16;  // v, Q2.16
  localparam int K_W     = 18;  localparam int K_FRAC    = 12;  // PID a0,a1,a2, Q6.12

  // Matrix entries of the paper (uH) in Q.8: 620, -7, -1.67
  localparam logic signed [M_W-1:0] M_DIAG_Q = 20'sd158720;  //  620    * 256
  localparam logic signed [M_W-1:0] M_NEAR_Q = -20'sd1792;   //  -7     * 256
  localparam logic signed [M_W-1:0] M_FAR_Q  = -20'sd428;    //  -1.67  * 256 (rounded)

  // Defaults of the adjustable parameters (not given by the paper)
  localparam logic signed [BETA_W-1:0]  BETA_DEF  = 16'sd256;    // 1.0
  localparam logic signed [ALPHA_W-1:0] ALPHA_DEF = 16'sd0;
  localparam logic signed [V_W-1:0]     V_DEF     = 18'sd106;    // ~1/620
  localparam logic signed [K_W-1:0]     A0_DEF    = 18'sd4096;   // Kp=1, Ti=inf, Td=0
  localparam logic signed [K_W-1:0]     A1_DEF    = -18'sd4096;
  localparam logic signed [K_W-1:0]     A2_DEF    = 18'sd0;

  // ---------------- RS-485 word (own choice) ----------------
  // line idle = 1; start bit 0; 4-bit path; 16-bit data LSB first; even parity over
  // path and data; stop bit 1.  23 bit times = 575 ns per word at 40 Mbit/s.
  localparam int RS_PAYLOAD_W = PATH_W + DAC_W;           // 20
  localparam int RS_WORD_BITS = RS_PAYLOAD_W + 3;         // 23

  // ---------------- parameter register map (own choice) ----------------
  typedef enum logic [3:0] {
    CFG_BETA  = 4'd0,
    CFG_ALPHA = 4'd1,
    CFG_C0    = 4'd2,
    CFG_C1    = 4'd3,
    CFG_C2    = 4'd4,
    CFG_V     = 4'd5,
    CFG_SETPT = 4'd6,
    CFG_A0    = 4'd7,
    CFG_A1    = 4'd8,
    CFG_A2    = 4'd9,
    CFG_CTRL  = 4'd10   // bit0: run (periodic sampling), bit1: clear PID state
  } cfg_addr_e;

  typedef struct packed {
    logic signed [BETA_W-1:0]  beta;
    logic signed [ALPHA_W-1:0] alpha;
    logic signed [M_W-1:0]     c0;     // diagonal entry
    logic signed [M_W-1:0]     c1;     // neighbour entry
    logic signed [M_W-1:0]     c2;     // next-neighbour entry
    logic signed [V_W-1:0]     v;
    logic signed [DAC_W-1:0]   setpt;
    logic signed [K_W-1:0]     a0;
    logic signed [K_W-1:0]     a1;
    logic signed [K_W-1:0]     a2;
  } coef_t;

  localparam coef_t COEF_DEF = '{beta: BETA_DEF, alpha: ALPHA_DEF, c0: M_DIAG_Q, c1: M_NEAR_Q,
                                 c2: M_FAR_Q, v: V_DEF, setpt: '0, a0: A0_DEF, a1: A1_DEF, a2: A2_DEF};

  // one word of a per-path stream
  typedef struct packed {
    logic [PATH_W-1:0]        path;
    logic signed [DAC_W-1:0]  data;
  } path_word_t;

  // saturate a wide signed value to DAC_W bits
  function automatic logic signed [DAC_W-1:0] sat16(input logic signed [63:0] x);
    if (x > 64'sd32767)       return 16'sh7FFF;
    else if (x < -64'sd32768) return 16'sh8000;
    else                      return x[DAC_W-1:0];
  endfunction

endpackage
