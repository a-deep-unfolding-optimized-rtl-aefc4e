// gbcd_pkg -- shared sizes, fixed-point formats and types of the GBCD
// (Gram-domain block coordinate descent) soft-output MIMO detector.
//
// System size: B = 128 base-station antennas, U = 16 users, block size L = 2,
// K = 3 outer iterations, QPSK to 256-QAM. These and the word lengths of H, y
// (12 bit), G (15 bit), y^MF and r (18 bit), z (11 bit) and the LLRs (18 bit)
// follow the published design. Every fraction-bit position, and every width not
// listed there (K_m, v, delta-z, PE accumulators, table entries), is this
// design's own choice. All complex quantities carry equal widths for the real
// and imaginary parts. The constellation is taken at unit average energy
// (Es = 1), so z uses 8 fraction bits and covers +-4.
package gbcd_pkg;

  // ---------------- system size ----------------
  localparam int unsigned B_ANT  = 128;  // BS antennas
  localparam int unsigned U_UE   = 16;   // users
  localparam int unsigned K_ITER = 3;    // outer iterations = BCD modules

  // ---------------- word lengths (bits per real part) ----------------
  localparam int unsigned HW      = 12;  // H and y
  localparam int unsigned H_FRAC  = 11;
  localparam int unsigned GW      = 15;  // Gram matrix
  localparam int unsigned G_FRAC  = 12;
  localparam int unsigned RW      = 18;  // y^MF and residual r
  localparam int unsigned R_FRAC  = 14;
  localparam int unsigned ZW      = 11;  // symbol estimate z
  localparam int unsigned Z_FRAC  = 8;
  localparam int unsigned VW      = 14;  // unconstrained estimate v (= s_hat)
  localparam int unsigned DZW     = 12;  // z_new - z_old
  localparam int unsigned KW      = 16;  // entries of K_m = inverse 2x2 block
  localparam int unsigned K_FRAC  = 12;
  localparam int unsigned LLRW    = 18;  // LLR outputs
  localparam int unsigned LLR_FRAC = 4;
  localparam int unsigned OPW     = 15;  // PE-A operand width (max of HW, GW)
  localparam int unsigned ACCW    = 36;  // PE-A accumulator width
  localparam int unsigned ISW     = 24;  // SINR^-1 key width
  localparam int unsigned IS_FRAC = 12;
  localparam int unsigned N0W     = 16;  // N0/Es, 16 fraction bits (unsigned)

  // ---------------- piecewise linear mapping tables ----------------
  localparam int unsigned NBIN        = 32;  // bins per table (2*sqrt(Q)-1 = 31 used by 256-QAM PME)
  localparam int unsigned PW          = 16;  // boundary / slope / bias width
  localparam int unsigned SLOPE_FRAC  = 10;
  localparam int unsigned NLLRB       = 4;   // LLR bit tables (bits per real dimension, 256-QAM)
  localparam int unsigned NTAB        = K_ITER + NLLRB;
  localparam int unsigned SCEN_W      = 6;   // parameter LUT address width
  localparam int unsigned ALPHA_FRAC  = 16;  // alpha = N0/Es, unsigned
  localparam int unsigned IALPHA_FRAC = 4;   // 1/alpha, unsigned

  typedef struct packed { logic signed [HW-1:0]  re, im; } cplx_h_t;
  typedef struct packed { logic signed [GW-1:0]  re, im; } cplx_g_t;
  typedef struct packed { logic signed [RW-1:0]  re, im; } cplx_r_t;
  typedef struct packed { logic signed [ZW-1:0]  re, im; } cplx_z_t;
  typedef struct packed { logic signed [VW-1:0]  re, im; } cplx_v_t;
  typedef struct packed { logic signed [DZW-1:0] re, im; } cplx_dz_t;
  typedef struct packed { logic signed [KW-1:0]  re, im; } cplx_k_t;
  typedef struct packed { logic signed [OPW-1:0] re, im; } cplx_op_t;

  // K_m = [k11 k12; conj(k12) k22] (Hermitian, real diagonal)
  typedef struct packed {
    logic signed [KW-1:0] k11;
    logic signed [KW-1:0] k22;
    cplx_k_t              k12;
  } kmat_t;

  // one row of a PLM table: lower bin boundary, slope and bias of bin idx
  typedef struct packed {
    logic signed [PW-1:0] bnd;    // input >= bnd  -> at least this bin
    logic signed [PW-1:0] slope;  // SLOPE_FRAC fraction bits
    logic signed [PW-1:0] bias;   // in output units
  } plm_ent_t;

  // "par": one row of every table per cycle while the LUTs are initialised
  typedef struct packed {
    logic                          valid;
    logic [$clog2(NBIN)-1:0]       idx;
    plm_ent_t [NTAB-1:0]           ent;       // [0..K-1] denoisers, [K..] LLR bits
    logic [PW-1:0]                 alpha;     // ALPHA_FRAC fraction bits
    logic [PW-1:0]                 inv_alpha; // IALPHA_FRAC fraction bits
  } par_t;

  // coherence-block information, held in the info buffer
  typedef struct packed {
    logic [1:0]        qam;     // 0: QPSK, 1: 16-QAM, 2: 64-QAM, 3: 256-QAM
    logic              los;     // line-of-sight channel
    logic signed [6:0] snr_db;  // receive SNR in dB
    logic [N0W-1:0]    n0;      // N0/Es
  } info_t;

  typedef enum logic [1:0] {PE_IDLE, PE_GRAM, PE_MF, PE_INTF} pe_mode_e;

  // signed saturation of a wide value to W bits (W <= 64)
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] x, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

endpackage
