// mimo_pkg -- types, constants and small arithmetic helpers shared by the
// 128-antenna TDD massive-MIMO base-station baseband.
//
// Numbers that come from the system description: 128 base-station antennas,
// 12 single-antenna users, 2048-point FFT at 30.72 MS/s, 1200 used
// subcarriers, 7 OFDM symbols per 0.5 ms slot with normal cyclic prefix,
// 10 subframes per 10 ms frame, 8 subsystems of 16 antennas, 4 sub-band
// co-processors, BPSK/QPSK/16-QAM/64-QAM.  The LTE normal-CP lengths (160
// samples for the first symbol of a slot, 144 for the others) and the 16-bit
// I/Q sample format are this design's choices.
package mimo_pkg;

  localparam int M_ANT      = 128;   // base-station antennas
  localparam int K_UE       = 12;    // single-antenna users = subcarriers per sub-band
  localparam int N_FFT      = 2048;
  localparam int N_SC       = 1200;  // used subcarriers
  localparam int N_SYM_SLOT = 7;
  localparam int N_SUBFRAME = 10;
  localparam int N_SLOT_SF  = 2;
  localparam int CP_FIRST   = 160;
  localparam int CP_OTHER   = 144;
  localparam int N_SUBSYS   = 8;
  localparam int ANT_SUB    = 16;    // antennas per subsystem
  localparam int CH_NODE    = 2;     // RF chains per USRP RIO
  localparam int N_COPROC   = 4;     // sub-band processors

  localparam int SW = 16;            // sample component width

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  // Symbol types of the data-slot layout and the sync subframe.
  typedef enum logic [2:0] {
    SYM_PSS      = 3'd0,
    SYM_UL_PILOT = 3'd1,
    SYM_UL_DATA  = 3'd2,
    SYM_DL_PILOT = 3'd3,
    SYM_DL_DATA  = 3'd4,
    SYM_GUARD    = 3'd5
  } sym_type_e;

  typedef enum logic [1:0] {
    MOD_BPSK  = 2'd0,
    MOD_QPSK  = 2'd1,
    MOD_QAM16 = 2'd2,
    MOD_QAM64 = 2'd3
  } mod_e;

  function automatic int bits_per_sym(mod_e m);
    case (m)
      MOD_BPSK:  return 1;
      MOD_QPSK:  return 2;
      MOD_QAM16: return 4;
      default:   return 6;
    endcase
  endfunction

  // Saturate a wide value to SW bits.
  function automatic logic signed [SW-1:0] sat(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sd32767;
    else if (v < -64'sd32768) return -16'sd32768;
    else                      return v[SW-1:0];
  endfunction

  function automatic cplx_t cmul_q15(cplx_t a, cplx_t b);
    // (a*b) >> 15, rounded, saturated
    logic signed [63:0] r, i;
    r = 64'($signed(a.re)) * 64'($signed(b.re)) - 64'($signed(a.im)) * 64'($signed(b.im));
    i = 64'($signed(a.re)) * 64'($signed(b.im)) + 64'($signed(a.im)) * 64'($signed(b.re));
    return '{re: sat((r + 64'sd16384) >>> 15), im: sat((i + 64'sd16384) >>> 15)};
  endfunction

  function automatic cplx_t conj_c(cplx_t a);
    return '{re: a.re, im: sat(-64'($signed(a.im)))};
  endfunction

  // Used subcarrier u (0..nsc-1, lowest frequency first) to FFT bin: the lower
  // half sits just below DC (bins n-nsc/2 .. n-1), the upper half just above
  // it (bins 1 .. nsc/2); DC and the band edges are guard.
  function automatic int sc_to_bin(int u, int n, int nsc);
    return (u < nsc / 2) ? n - nsc / 2 + u : u - nsc / 2 + 1;
  endfunction

endpackage
