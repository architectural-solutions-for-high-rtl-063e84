// tau_pkg: types, sizes and helper functions shared by every stage of the
// HPS tau trigger pipeline.
//
// The pipeline sizes follow the published design: 128 input particles of 64
// bits each, 16 seeds, four filter blocks of 32 particles per seed, at most 30
// candidates per seed, 16 reconstructed tau candidates and at most 8 final taus.
// The layout of the 64-bit particle word, the angular units and the cone sizes
// are this design's own choice (the original only gives the 64-bit width):
//   pt    [15:0]  unsigned, 0.25 GeV per LSB
//   eta   [27:16] signed,   pi/720 per LSB
//   phi   [38:28] signed,   pi/720 per LSB, range [-720, 720)
//   pid   [41:39] particle type (pid_e)
//   charge[42]    1 = negative, 0 = positive (charged types only)
//   valid [43]    slot holds a particle
//   spare [63:44]
package tau_pkg;

  localparam int unsigned N_PART    = 128;  // input particles per event
  localparam int unsigned N_SEED    = 16;   // seeds (tau candidates) per event
  localparam int unsigned N_FILT    = 4;    // filter blocks per seed
  localparam int unsigned FILT_LEN  = 32;   // particles examined by one filter block
  localparam int unsigned MAX_CAND  = 30;   // target list capacity per seed
  localparam int unsigned N_TAU_OUT = 8;    // final taus after cleaning

  localparam int unsigned PT_W   = 16;
  localparam int unsigned ANG_W  = 12;      // eta width; phi is carried sign-extended
  localparam int unsigned SUMPT_W = 24;     // sum of up to 128 pt values
  localparam int          PHI_HALF = 720;   // pi in angular LSBs

  // Cone sizes, squared, in (pi/720)^2 units.
  localparam int unsigned R2_FILT  = 92*92;   // 0.40 rad candidate cone around a seed
  localparam int unsigned R2_CLEAN = 92*92;   // 0.40 rad proximity for cleaning
  localparam int unsigned R2_SIG_MIN = 11*11; // 0.05 rad minimum signal cone
  localparam int unsigned R2_SIG_MAX = 23*23; // 0.10 rad maximum signal cone
  // Signal cone R = K / totalPt, K = 3 GeV*rad = 2750 (pt LSB * angle LSB).
  localparam longint unsigned K2_SIG = 64'd2750 * 64'd2750;

  typedef enum logic [2:0] {
    PID_NONE    = 3'd0,
    PID_CH_HAD  = 3'd1,
    PID_ELECTRON= 3'd2,
    PID_MUON    = 3'd3,
    PID_PHOTON  = 3'd4,
    PID_NEU_HAD = 3'd5
  } pid_e;

  typedef struct packed {
    logic [19:0]       spare;
    logic              valid;
    logic              charge;
    pid_e              pid;
    logic signed [10:0] phi;
    logic signed [11:0] eta;
    logic [15:0]       pt;
  } particle_t;  // 64 bits

  // One beat of a per-seed candidate stream (merge -> selection -> params).
  // The first beat of an event is a header carrying the seed and totalPt;
  // the following beats carry candidates. 'last' marks the final beat.
  typedef struct packed {
    logic                 hdr;
    logic                 last;
    logic [SUMPT_W-1:0]   total_pt;
    particle_t            p;
  } cand_beat_t;

  // Candidate after signal selection.
  typedef struct packed {
    logic                 hdr;
    logic                 last;
    logic                 is_signal;
    logic [SUMPT_W-1:0]   total_pt;
    particle_t            p;
  } sel_beat_t;

  // Per-seed tau properties (output of the parameter calculation).
  typedef struct packed {
    particle_t            seed;
    logic [SUMPT_W-1:0]   sum_pt;      // sum of signal candidate pt
    logic signed [11:0]   avg_deta;    // pt-weighted mean eta offset from seed
    logic signed [11:0]   avg_dphi;    // pt-weighted mean phi offset from seed
    logic [4:0]           n_charged;   // charged signal candidates
    logic signed [5:0]    charge_sum;  // sum of charges of charged signal candidates
  } tau_props_t;

  typedef struct packed {
    logic                 valid;
    logic signed [5:0]    charge;
    logic [4:0]           n_prong;
    logic signed [10:0]   phi;
    logic signed [11:0]   eta;
    logic [15:0]          pt;
  } tau_t;  // 52 bits

  function automatic logic is_charged(pid_e t);
    return (t == PID_CH_HAD) || (t == PID_ELECTRON) || (t == PID_MUON);
  endfunction

  // Wrap a phi difference or sum into [-720, 720).
  function automatic logic signed [11:0] wrap_phi(logic signed [12:0] d);
    logic signed [12:0] r;
    r = d;
    if (r >= 13'sd720)       r = r - 13'sd1440;
    else if (r < -13'sd720)  r = r + 13'sd1440;
    return r[11:0];
  endfunction

  function automatic logic signed [12:0] deta(particle_t a, particle_t b);
    return 13'(a.eta) - 13'(b.eta);
  endfunction

  function automatic logic signed [11:0] dphi(particle_t a, particle_t b);
    return wrap_phi(13'(a.phi) - 13'(b.phi));
  endfunction

  // Squared angular distance: two multiplications and one addition.
  function automatic logic [25:0] dr2(particle_t a, particle_t b);
    logic signed [25:0] de;
    logic signed [25:0] dp;
    de = 26'(deta(a, b));
    dp = 26'(dphi(a, b));
    return 26'(de * de + dp * dp);
  endfunction

endpackage
