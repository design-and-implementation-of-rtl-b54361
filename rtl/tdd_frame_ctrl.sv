// tdd_frame_ctrl -- TDD frame timing of the base station.
//
// A 10 ms radio frame holds 10 subframes of two 0.5 ms slots; each slot holds
// 7 OFDM symbols.  Subframe 0 is the synchronisation subframe: its first
// symbol carries the PSS and the remaining 13 are guard.  Subframes 1..9 are
// data subframes whose two slots have the same layout:
//   UL pilot, UL data, UL data, guard, DL pilot, DL data, guard.
// The frame layout follows the frame-structure description; the normal cyclic
// prefix lengths (160 samples for symbol 0 of a slot, 144 for the others at
// 30.72 MS/s, i.e. 15360 samples per slot) are the LTE numbers and are this
// design's choice.
//
// How it works: one frame position counter `pos` counts samples (advancing on
// sample_en).  Everything else is decoded from `pos` combinationally, so the
// outputs describe the sample presented in the same cycle as sample_en.
// Alignment to the users: when `align` pulses, `pos` is moved by
// (PEAK_POS - align_idx) modulo the frame, where align_idx is the frame
// position at which the PSS correlator saw its peak and PEAK_POS is the
// position of that peak in an aligned frame.
//
// Interface: sample_en (one pulse per baseband sample), align/align_idx in;
// subframe, slot, sym (0..6 within the slot), samp (index inside the symbol,
// CP included), cp_len, sym_type, in_cp, useful_first (first sample after the
// CP), tx_en (downlink symbols, drives the TDD switch), frame_start out.
module tdd_frame_ctrl
  import mimo_pkg::*;
#(
  parameter int NFFT     = N_FFT,
  parameter int CP0      = CP_FIRST,
  parameter int CP1      = CP_OTHER,
  parameter int NSF      = N_SUBFRAME,
  parameter int PEAK_POS = CP_FIRST + 255,    // matches pss_sync's default window
  localparam int SYM0    = NFFT + CP0,
  localparam int SYM1    = NFFT + CP1,
  localparam int SLOT    = SYM0 + 6 * SYM1,
  localparam int FRAME   = NSF * 2 * SLOT,
  localparam int PW      = $clog2(FRAME)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            sample_en,
  input  logic            align,
  input  logic [PW-1:0]   align_idx,
  output logic [PW-1:0]   pos,
  output logic [3:0]      subframe,
  output logic            slot,
  output logic [2:0]      sym,
  output logic [$clog2(SYM0)-1:0] samp,
  output logic [$clog2(SYM0)-1:0] cp_len,
  output sym_type_e       sym_type,
  output logic            in_cp,
  output logic            useful_first,
  output logic            tx_en,
  output logic            frame_start
);
  localparam int SW_ = $clog2(SYM0);

  // ---- frame position counter ----
  logic [PW:0] shift;   // (PEAK_POS - align_idx) mod FRAME
  always_comb begin
    if (PW'(PEAK_POS) >= align_idx) shift = (PW+1)'(PEAK_POS) - (PW+1)'(align_idx);
    else                            shift = (PW+1)'(PEAK_POS) + (PW+1)'(FRAME) - (PW+1)'(align_idx);
  end

  always_ff @(posedge clk) begin
    logic [PW+1:0] nxt;
    if (rst) pos <= '0;
    else begin
      nxt = (PW+2)'(pos) + (sample_en ? (PW+2)'(1) : '0) + (align ? (PW+2)'(shift) : '0);
      if (nxt >= (PW+2)'(2 * FRAME)) nxt = nxt - (PW+2)'(2 * FRAME);
      else if (nxt >= (PW+2)'(FRAME)) nxt = nxt - (PW+2)'(FRAME);
      pos <= PW'(nxt);
    end
  end

  // ---- decode ----
  logic [PW-1:0] in_slot;
  logic [4:0]    slot_no;
  always_comb begin
    slot_no = 5'(pos / PW'(SLOT));
    in_slot = pos - PW'(slot_no) * PW'(SLOT);
    subframe = 4'(slot_no >> 1);
    slot     = slot_no[0];
    if (in_slot < PW'(SYM0)) begin
      sym  = 3'd0;
      samp = SW_'(in_slot);
    end else begin
      sym  = 3'((in_slot - PW'(SYM0)) / PW'(SYM1) + 1'b1);
      samp = SW_'((in_slot - PW'(SYM0)) - PW'(sym - 3'd1) * PW'(SYM1));
    end
    cp_len       = (sym == 3'd0) ? SW_'(CP0) : SW_'(CP1);
    in_cp        = samp < cp_len;
    useful_first = samp == cp_len;
    frame_start  = pos == '0;
    if (subframe == 4'd0) begin
      sym_type = (slot == 1'b0 && sym == 3'd0) ? SYM_PSS : SYM_GUARD;
    end else begin
      case (sym)
        3'd0:      sym_type = SYM_UL_PILOT;
        3'd1, 3'd2: sym_type = SYM_UL_DATA;
        3'd4:      sym_type = SYM_DL_PILOT;
        3'd5:      sym_type = SYM_DL_DATA;
        default:   sym_type = SYM_GUARD;
      endcase
    end
    tx_en = (sym_type == SYM_DL_PILOT) || (sym_type == SYM_DL_DATA);
  end

endmodule
