// bs_top -- baseband of one base-station radio node of the TDD massive-MIMO
// system: frame timing, PSS synchronisation, per-antenna OFDM demodulation of
// the uplink symbols and OFDM modulation of the downlink symbol stream.
//
// How it works: every received baseband sample (rx_valid, one complex sample
// per antenna) advances the frame controller.  Antenna 0 also feeds the PSS
// correlator; when a frame ends with a peak above the threshold the frame
// controller is re-aligned so that the peak sits at its nominal position.
// Samples of uplink pilot and data symbols, with the cyclic prefix removed,
// go to one OFDM demodulator per antenna; its output (subcarrier index, value
// and a tag holding subframe/slot/symbol) is what the system sends on to the
// channel estimation and detection co-processors.  Downlink frequency-domain
// symbols from the precoding stage enter dl_*; the modulator adds the cyclic
// prefix and its samples leave on tx_* whenever the frame controller marks a
// downlink symbol (tx_en also switches the TDD front end).
//
// What follows the system description: the frame layout (PSS subframe, then
// UL pilot / 2 UL data / guard / DL pilot / DL data / guard per slot), the
// PSS peak search over a 10 ms frame, the FFT-based OFDM, 2 RF chains per
// radio node.  This design's choices: a node-level top (the 128-antenna
// system is 64 such nodes plus co-processors that are not built here), the
// 16-bit sample format, the 8-bit symbol tag, one shared modulator, and using
// antenna 0 for synchronisation.
//
// Timing: rx_valid may come at most once per clock; the transforms need
// N/2*log2(N) clocks per symbol, so the clock must be at least that many
// times faster than the symbol rate (about 8x the sample rate at N = 2048).
module bs_top
  import mimo_pkg::*;
#(
  parameter int NANT  = CH_NODE,
  parameter int NFFT  = N_FFT,
  parameter int NSC   = N_SC,
  parameter int CP0   = CP_FIRST,
  parameter int CP1   = CP_OTHER,
  parameter int NSF   = N_SUBFRAME,
  parameter int L     = 256,
  localparam int FRAME = NSF * 2 * (7 * NFFT + CP0 + 6 * CP1),
  localparam int PW   = $clog2(FRAME),
  localparam int UW   = $clog2(NSC),
  localparam int AW   = $clog2(L)
) (
  input  logic            clk,
  input  logic            rst,
  // receive samples from the ADC / DDC chain
  input  logic            rx_valid,
  input  cplx_t           rx_data [NANT],
  // PSS reference and detection threshold (host)
  input  logic            ref_we,
  input  logic [AW-1:0]   ref_addr,
  input  logic [1:0]      ref_sgn,
  input  logic [63:0]     threshold,
  // frame state
  output logic [PW-1:0]   frame_pos,
  output sym_type_e       sym_type,
  output logic            tx_en,
  output logic            sync_valid,
  output logic            sync_found,
  output logic [PW-1:0]   sync_idx,
  // uplink subcarriers towards the co-processors
  output logic [NANT-1:0] ul_valid,
  output logic [UW-1:0]   ul_sc   [NANT],
  output cplx_t           ul_data [NANT],
  output logic [7:0]      ul_tag  [NANT],
  output logic [NANT-1:0] ul_overflow,
  // downlink subcarriers from the precoder
  input  logic            dl_valid,
  output logic            dl_ready,
  input  logic [UW-1:0]   dl_sc,
  input  cplx_t           dl_data,
  // transmit samples towards the DUC / DAC chain
  output logic            tx_valid,
  output cplx_t           tx_data,
  output logic            tx_first,
  output logic            dl_overflow
);
  logic [3:0] subframe;
  logic       slot;
  logic [2:0] sym;
  logic [$clog2(NFFT+CP0)-1:0] samp, cp_len;
  logic       in_cp, useful_first, frame_start;
  logic       align;
  logic [63:0] peak_metric;
  logic [7:0] sym_tag;

  assign align = sync_valid && sync_found;

  tdd_frame_ctrl #(.NFFT(NFFT), .CP0(CP0), .CP1(CP1), .NSF(NSF), .PEAK_POS(CP0 + L - 1)) u_frame (
    .clk, .rst, .sample_en(rx_valid), .align, .align_idx(sync_idx), .pos(frame_pos),
    .subframe, .slot, .sym, .samp, .cp_len, .sym_type, .in_cp, .useful_first, .tx_en, .frame_start
  );

  pss_sync #(.L(L), .FRAME(FRAME)) u_sync (
    .clk, .rst, .sample_en(rx_valid), .sample(rx_data[0]), .pos(frame_pos),
    .ref_we, .ref_addr, .ref_sgn, .threshold,
    .peak_valid(sync_valid), .peak_idx(sync_idx), .peak_metric, .found(sync_found)
  );

  assign sym_tag = {subframe, slot, sym};

  logic ul_take;
  assign ul_take = rx_valid && !in_cp && (sym_type == SYM_UL_PILOT || sym_type == SYM_UL_DATA);

  for (genvar a = 0; a < NANT; a++) begin : g_ant
    ofdm_demod #(.N(NFFT), .NSC(NSC), .TW(8)) u_demod (
      .clk, .rst, .in_valid(ul_take), .in_first(useful_first), .in_data(rx_data[a]), .in_tag(sym_tag),
      .out_valid(ul_valid[a]), .out_sc(ul_sc[a]), .out_data(ul_data[a]), .out_tag(ul_tag[a]),
      .overflow(ul_overflow[a])
    );
  end

  logic [7:0] tx_tag;
  logic       mod_valid;
  ofdm_mod #(.N(NFFT), .NSC(NSC), .CP(CP1), .TW(8)) u_mod (
    .clk, .rst, .in_valid(dl_valid), .in_ready(dl_ready), .in_sc(dl_sc), .in_data(dl_data), .in_tag(8'd0),
    .out_valid(mod_valid), .out_ready(rx_valid && tx_en), .out_data(tx_data), .out_first(tx_first),
    .out_tag(tx_tag), .overflow(dl_overflow)
  );
  assign tx_valid = mod_valid && rx_valid && tx_en;

endmodule
