// pnc_pkg: types, constants and small lookup functions shared by the relay
// receiver and the end-node transmitter of the channel-aligned OFDM PNC system.
//
// Numbers that follow the source design: 64-point OFDM with a 16-sample cyclic
// prefix (80-sample symbols), a short training sequence (STS) of 16 samples sent
// 10 times, one 80-sample long training sequence (LTS) in the preamble and one
// in the postamble of every uplink packet, 100 data OFDM symbols per packet
// (5 lattice codewords of 960 symbols, 48 data subcarriers per symbol), a 1 ms
// time slot at 20 Msample/s and a slot-adjustment threshold of 2 samples.
//
// Choices of this design: 16-bit I/Q samples, phases as 16-bit fractions of a
// turn (2*pi == 2**16), CFO as a 32-bit fraction of a turn per sample, and the
// pilot assignment (node A on k' = +-21, node B on k' = +-7).
//
// LTS/STS tables: the 802.11a training symbols, time domain,
//   x[n] = 4096 * (64/sqrt(52)) * (1/64) * sum_k S[k] exp(j*2*pi*k*n/64),
// rounded to integers, with S[k] the 802.11a frequency-domain LTS (+-1 on
// k' = -26..26, 0 at DC) or STS (sqrt(13/6)*(+-1+-j) on every 4th subcarrier).
package pnc_pkg;

  // ---------------- OFDM numerology ----------------
  localparam int unsigned N_FFT      = 64;
  localparam int unsigned CP_LEN     = 16;
  localparam int unsigned SYM_LEN    = N_FFT + CP_LEN;     // 80
  localparam int unsigned STS_LEN    = 16;
  localparam int unsigned N_STS      = 10;
  localparam int unsigned LTS_LEN    = 80;                 // 16 CP + 64
  localparam int unsigned N_DATA_SC  = 48;
  localparam int unsigned N_CW       = 5;                  // codewords / packet
  localparam int unsigned CW_LEN     = 960;                // n
  localparam int unsigned N_SYM_CW   = CW_LEN / N_DATA_SC; // 20
  localparam int unsigned N_SYMS     = N_CW * N_SYM_CW;    // 100
  localparam int unsigned SLOT_LEN   = 20000;              // 1 ms at 20 MHz
  localparam int unsigned D_THRESH   = 2;
  localparam int signed   KP_FB1     = -26;                // fed-back subcarriers
  localparam int signed   KP_FB2     = 26;

  // Packet layout of one node (samples), Fig. 16: both nodes occupy the same
  // sections, each one transmitting zeros in the other's training sections.
  localparam int unsigned SEC_STS    = N_STS * STS_LEN;    // 160 per node
  localparam int unsigned PRE_LEN    = 2 * SEC_STS + 2 * LTS_LEN;   // 480
  localparam int unsigned DATA_LEN   = N_SYMS * SYM_LEN;   // 8000
  localparam int unsigned POST_LEN   = 2 * LTS_LEN;        // 160
  localparam int unsigned PKT_LEN    = PRE_LEN + DATA_LEN + POST_LEN; // 8640

  // ---------------- number formats ----------------
  localparam int unsigned SW  = 16;   // sample I/Q width
  localparam int unsigned PW  = 16;   // phase width, turns
  localparam int unsigned CFW = 32;   // CFO width, turns per sample

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  typedef logic [PW-1:0] phase_t;
  typedef logic signed [CFW-1:0] cfo_t;

  typedef enum logic [0:0] {NODE_A = 1'b0, NODE_B = 1'b1} node_e;

  // Feedback from the relay to one end node, once per slot: two phases,
  // one amplitude, one CFO (Sec. "Reciprocity-Based Phase Precoding").
  typedef struct packed {
    phase_t       ph_k1;   // uplink phase at k' = -26
    phase_t       ph_k2;   // uplink phase at k' = +26
    logic [15:0]  amp;     // overall amplitude scale, Q4.12
    cfo_t         cfo;     // turns / sample
    logic signed [7:0] off; // arrival offset behind node A, samples (own choice)
  } feedback_t;

  // ---------------- subcarrier helpers ----------------
  // shifted index k' of FFT bin k
  function automatic int kprime(input int k);
    return (k < int'(N_FFT/2)) ? k : k - int'(N_FFT);
  endfunction

  function automatic int bin_of(input int kp);
    return (kp < 0) ? kp + int'(N_FFT) : kp;
  endfunction

  function automatic bit is_pilot(input int kp);
    return (kp == 7) || (kp == -7) || (kp == 21) || (kp == -21);
  endfunction

  // pilots owned by a node
  function automatic bit is_own_pilot(input int kp, input node_e n);
    if (n == NODE_A) return (kp == 21) || (kp == -21);
    else             return (kp == 7)  || (kp == -7);
  endfunction

  function automatic bit is_used(input int kp);
    return (kp != 0) && (kp >= -26) && (kp <= 26);
  endfunction

  function automatic bit is_data(input int kp);
    return is_used(kp) && !is_pilot(kp);
  endfunction

  // 802.11a LTS value (+1/-1/0) on shifted index kp
  function automatic int lts_freq(input int kp);
    logic [52:0] pat;
    // bit (kp+26) = 1 for +1; order k' = -26 .. 26
    pat = 53'b11110101001100000101011001011110101100111111010110011;
    if (!is_used(kp)) return 0;
    return pat[kp+26] ? 1 : -1;
  endfunction

  // ---------------- time-domain training sequences ----------------
  function automatic cplx_t lts_td(input int n);
    cplx_t v;
    case (n)
      0: v = '{ 5680,     0};  1: v = '{ -186, -4374};  2: v = '{ 1445, -4041};  3: v = '{ 3520,  3010};
      4: v = '{  767,  1014};  5: v = '{ 2175, -3188};  6: v = '{-4185, -2006};  7: v = '{-1393, -3860};
      8: v = '{ 3546,  -941};  9: v = '{ 1939,   148}; 10: v = '{   36, -4181}; 11: v = '{-4973, -1722};
     12: v = '{  890, -2128}; 13: v = '{ 2133,  -543}; 14: v = '{ -817,  5840}; 15: v = '{ 4335,  -149};
     16: v = '{ 2272, -2272}; 17: v = '{ 1342,  3575}; 18: v = '{-2080,  1429}; 19: v = '{-4772,  2371};
     20: v = '{ 2989,  3357}; 21: v = '{ 2529,   513}; 22: v = '{-2192,  2955}; 23: v = '{-2052,  -793};
     24: v = '{-1274, -5485}; 25: v = '{-4431,  -602}; 26: v = '{-4629,  -745}; 27: v = '{ 2729, -2692};
     28: v = '{ -102,  1955}; 29: v = '{-3340,  4185}; 30: v = '{ 3334,  3849}; 31: v = '{  447,  3548};
     32: v = '{-5680,     0}; 33: v = '{  447, -3548}; 34: v = '{ 3334, -3849}; 35: v = '{-3340, -4185};
     36: v = '{ -102, -1955}; 37: v = '{ 2729,  2692}; 38: v = '{-4629,   745}; 39: v = '{-4431,   602};
     40: v = '{-1274,  5485}; 41: v = '{-2052,   793}; 42: v = '{-2192, -2955}; 43: v = '{ 2529,  -513};
     44: v = '{ 2989, -3357}; 45: v = '{-4772, -2371}; 46: v = '{-2080, -1429}; 47: v = '{ 1342, -3575};
     48: v = '{ 2272,  2272}; 49: v = '{ 4335,   149}; 50: v = '{ -817, -5840}; 51: v = '{ 2133,   543};
     52: v = '{  890,  2128}; 53: v = '{-4973,  1722}; 54: v = '{   36,  4181}; 55: v = '{ 1939,  -148};
     56: v = '{ 3546,   941}; 57: v = '{-1393,  3860}; 58: v = '{-4185,  2006}; 59: v = '{ 2175,  3188};
     60: v = '{  767, -1014}; 61: v = '{ 3520, -3010}; 62: v = '{ 1445,  4041}; default: v = '{ -186,  4374};
    endcase
    return v;
  endfunction

  function automatic cplx_t sts_td(input int n);
    cplx_t v;
    case (n)
      0: v = '{ 1672,  1672};  1: v = '{-4815,    85};  2: v = '{ -490, -2855};  3: v = '{ 5190,  -460};
      4: v = '{ 3344,     0};  5: v = '{ 5190,  -460};  6: v = '{ -490, -2855};  7: v = '{-4815,    85};
      8: v = '{ 1672,  1672};  9: v = '{   85, -4815}; 10: v = '{-2855,  -490}; 11: v = '{ -460,  5190};
     12: v = '{    0,  3344}; 13: v = '{ -460,  5190}; 14: v = '{-2855,  -490}; default: v = '{   85, -4815};
    endcase
    return v;
  endfunction

  // ---------------- arithmetic helpers ----------------
  // arctan(2^-i) as a fraction of a turn, 2^16 == one turn
  function automatic logic [PW-1:0] atan_turns(input int i);
    case (i)
      0: return 16'd8192;  1: return 16'd4836;  2: return 16'd2555;  3: return 16'd1297;
      4: return 16'd651;   5: return 16'd326;   6: return 16'd163;   7: return 16'd81;
      8: return 16'd41;    9: return 16'd20;   10: return 16'd10;   11: return 16'd5;
     12: return 16'd3;    13: return 16'd1;    14: return 16'd1;    default: return 16'd0;
    endcase
  endfunction

  // cos(2*pi*e/64) in Q2.14 for e = 0..16 (quarter wave)
  function automatic int cos_q14(input int e);
    case (e)
      0: return 16384;  1: return 16305;  2: return 16069;  3: return 15679;
      4: return 15137;  5: return 14449;  6: return 13623;  7: return 12665;
      8: return 11585;  9: return 10394; 10: return 9102;  11: return 7723;
     12: return 6270;  13: return 4756;  14: return 3196;  15: return 1606;
      default: return 0;
    endcase
  endfunction

  // CORDIC gain compensation 1/1.6468 in Q1.15
  localparam int CORDIC_K_Q15 = 19898;

  // sign-extend and saturate helpers
  function automatic logic signed [SW-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[SW-1:0];
  endfunction

endpackage
