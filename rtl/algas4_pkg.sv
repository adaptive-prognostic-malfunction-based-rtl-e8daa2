// algas4_pkg: widths, encodings and constant tables shared by the ALGAS4
// landing-guidance RTL.
//
// Sensor resolutions follow the published design: the lidar range input is
// 11 bits and the radar range input 10 bits.  Both are taken to report the
// same distance unit, so the APMU can subtract them directly and the
// fuzzifier can use one set of membership breakpoints for both.  Everything
// else here (grade width, output scale, packet layout, link speed codes,
// FIR coefficients) is this implementation's own choice and is documented
// next to each item.
package algas4_pkg;

  // ---------------------------------------------------------------- sensors
  localparam int unsigned LIDAR_W = 11;            // lidar crisp input
  localparam int unsigned RADAR_W = 10;            // radar crisp input
  localparam int unsigned NUM_CORNERS = 4;

  typedef logic [LIDAR_W-1:0] lidar_t;
  typedef logic [RADAR_W-1:0] radar_t;

  // ------------------------------------------------------------- fuzzy logic
  localparam int unsigned GRADE_W = 8;             // membership degree 0..255
  localparam int unsigned FLS_OUT_W = 7;           // crisp command 0..127
  typedef logic [GRADE_W-1:0] grade_t;
  typedef logic [FLS_OUT_W-1:0] fls_out_t;

  // Input linguistic terms: Extremely Near, Near, Middle, Far, Extremely Far.
  typedef enum logic [2:0] {T_EN = 3'd0, T_N = 3'd1, T_M = 3'd2, T_F = 3'd3, T_EF = 3'd4} in_term_e;
  localparam int unsigned NUM_IN_TERMS = 5;
  // Output terms: Low, Middle, High, Extremely High.
  typedef enum logic [1:0] {O_L = 2'd0, O_M = 2'd1, O_H = 2'd2, O_EH = 2'd3} out_term_e;
  localparam int unsigned NUM_OUT_TERMS = 4;

  typedef grade_t mu_vec_t [NUM_IN_TERMS];
  typedef grade_t w_vec_t  [NUM_OUT_TERMS];

  // Membership breakpoints: term k peaks at k*MF_STEP, triangles overlap
  // their neighbours, the outer terms are shoulders.  MF_STEP is a power of
  // two so each ramp is a shift, no divider.
  localparam int unsigned MF_SHIFT = 8;
  localparam int unsigned MF_STEP  = 1 << MF_SHIFT; // 256 distance units

  // Singleton centres of the output terms on the 0..127 command scale.
  localparam int unsigned OUT_CENTER [NUM_OUT_TERMS] = '{10, 40, 70, 110};

  // The eleven Mamdani rules: IF lidar IS l AND radar IS r THEN out IS o.
  typedef struct packed {
    in_term_e  l;
    in_term_e  r;
    out_term_e o;
  } fls_rule_t;
  localparam int unsigned NUM_RULES = 11;
  localparam fls_rule_t RULES [NUM_RULES] = '{
    '{T_EN, T_EN, O_EH},
    '{T_N,  T_EN, O_H },
    '{T_EN, T_N,  O_H },
    '{T_N,  T_N,  O_H },
    '{T_M,  T_M,  O_M },
    '{T_F,  T_M,  O_M },
    '{T_F,  T_F,  O_L },
    '{T_EF, T_F,  O_L },
    '{T_F,  T_EF, O_L },
    '{T_EF, T_EF, O_L },
    '{T_M,  T_F,  O_M }
  };

  // -------------------------------------------------------------------- APMU
  localparam int unsigned APMU_SLOTS = 16;          // m, maximum window
  localparam int unsigned APMU_MIN_SLOTS = 4;       // minimum window
  localparam int unsigned ABS_W = LIDAR_W;          // |S1-S2| fits 11 bits
  localparam int unsigned PHI_W = ABS_W + $clog2(APMU_SLOTS); // 15 bits
  localparam int unsigned WIN_W = $clog2(APMU_SLOTS) + 1;     // 0..16
  typedef logic [ABS_W-1:0] abs_t;
  typedef logic [PHI_W-1:0] phi_t;
  // Default threshold per active slot (reset contents of the threshold LUT).
  localparam int unsigned THR_PER_SLOT = 20;

  // ------------------------------------------------------------------- FIR
  // Binomial (Gaussian-like) low-pass: h[k] = C(TAPS-1, k); the taps sum to
  // 2**(TAPS-1), so the DC gain is exactly one after a right shift.
  function automatic int unsigned binom(input int unsigned n, input int unsigned k);
    int unsigned r;
    r = 1;
    for (int unsigned i = 0; i < k; i++) r = r * (n - i) / (i + 1);
    return r;
  endfunction

  // ----------------------------------------------------- DIC packet / HSDCI
  typedef struct packed {
    logic [1:0] core_id;   // sending corner
    logic       alarm;     // sender's APMU decision
    fls_out_t   fls;       // sender's crisp FLS command
    lidar_t     lidar;     // sender's filtered lidar distance
    radar_t     radar;     // sender's filtered radar distance
    logic       seq;       // toggles on every new packet
  } dic_pkt_t;
  localparam int unsigned PKT_W = $bits(dic_pkt_t);   // 32

  // Link speed: bit period of 4, 8, 16 or 32 clock cycles.
  typedef enum logic [1:0] {LS_DIV4 = 2'd0, LS_DIV8 = 2'd1, LS_DIV16 = 2'd2, LS_DIV32 = 2'd3} link_speed_e;

endpackage
