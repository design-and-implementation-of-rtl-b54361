// ofdm_mod -- transmit OFDM modulation of one RF chain: guard-subcarrier
// insertion, IFFT and cyclic-prefix insertion.
//
// The NSC used subcarriers of a symbol arrive in frequency order (in_sc =
// 0..NSC-1) with a valid/ready handshake.  Each is written to its FFT bin
// (bins N-NSC/2..N-1 for the lower half, 1..NSC/2 for the upper half); then
// the block writes zeros to the N-NSC guard bins (DC and band edges; in_ready
// is low meanwhile) and starts the inverse transform in the two-bank fft_core.
// The first SCALE_STAGES stages are scaled by 1/2 to leave headroom; the rest
// are unscaled, so the time signal is sum(X)/2^SCALE_STAGES.
// The symbol leaves as CP + N samples (the last CP samples first) through a
// valid/ready handshake paced by the converter (one sample every two clocks at
// most).  Latency from the last subcarrier: (N-NSC) + N/2*log2(N) + 2 cycles.
// The +CP, IFFT, +guard chain follows the transmit chain of the base station;
// the mapping, scaling and handshake are this design's choices.
module ofdm_mod
  import mimo_pkg::*;
#(
  parameter int N            = N_FFT,
  parameter int NSC          = N_SC,
  parameter int CP           = CP_OTHER,
  parameter int SCALE_STAGES = 3,
  parameter int TW           = 8,
  localparam int LG = $clog2(N),
  localparam int UW = $clog2(NSC),
  localparam int OW = $clog2(N + CP)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [UW-1:0] in_sc,
  input  cplx_t         in_data,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  input  logic          out_ready,
  output cplx_t         out_data,
  output logic          out_first,
  output logic [TW-1:0] out_tag,
  output logic          overflow
);
  typedef enum logic [1:0] {O_IDLE, O_FETCH, O_HOLD} ost_e;

  logic          zeroing;
  logic [LG-1:0] zcnt;
  logic          wr_en, load_done;
  logic [LG-1:0] wr_addr;
  cplx_t         wr_data;
  logic [TW-1:0] tag_l, tag_c;
  logic          rd_ready, rd_release;
  logic [LG-1:0] rd_addr;
  ost_e          ost;
  logic [OW-1:0] oidx;

  // guard bins in increasing order: 0, NSC/2+1 .. N-NSC/2-1
  function automatic logic [LG-1:0] guard_bin(logic [LG-1:0] z);
    return (z == '0) ? '0 : LG'(NSC / 2) + z;
  endfunction

  assign in_ready = !zeroing && !load_done;   // bank swaps the cycle after load_done

  always_comb begin
    wr_en   = (in_valid && in_ready) || zeroing;
    wr_addr = zeroing ? guard_bin(zcnt) : LG'(sc_to_bin(int'(in_sc), N, NSC));
    wr_data = zeroing ? '0 : in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      zeroing <= 1'b0;
      zcnt <= '0;
      load_done <= 1'b0;
      tag_l <= '0;
      tag_c <= '0;
    end else begin
      load_done <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_sc == '0) tag_l <= in_tag;
        if (in_sc == UW'(NSC - 1)) begin
          zeroing <= 1'b1;
          zcnt <= '0;
        end
      end
      if (zeroing) begin
        if (zcnt == LG'(N - NSC - 1)) begin
          zeroing <= 1'b0;
          load_done <= 1'b1;
        end
        zcnt <= zcnt + 1'b1;
      end
      if (load_done) tag_c <= tag_l;
    end
  end

  fft_core #(.N(N)) u_fft (
    .clk, .rst, .inverse(1'b1), .scale_mask(LG'((1 << SCALE_STAGES) - 1)),
    .wr_en, .wr_addr, .wr_data, .load_done,
    .overflow, .rd_ready, .rd_addr, .rd_data(out_data), .rd_release
  );

  always_comb rd_addr = (oidx < OW'(CP)) ? LG'(N - CP) + LG'(oidx) : LG'(oidx - OW'(CP));

  always_ff @(posedge clk) begin
    if (rst) begin
      ost <= O_IDLE;
      oidx <= '0;
      rd_release <= 1'b0;
      out_tag <= '0;
    end else begin
      rd_release <= 1'b0;
      case (ost)
        O_IDLE: if (rd_ready && !rd_release) begin
          oidx <= '0;
          ost <= O_FETCH;
          out_tag <= tag_c;
        end
        O_FETCH: ost <= O_HOLD;
        O_HOLD: if (out_ready) begin
          if (oidx == OW'(N + CP - 1)) begin
            rd_release <= 1'b1;
            ost <= O_IDLE;
          end else begin
            oidx <= oidx + 1'b1;
            ost <= O_FETCH;
          end
        end
        default: ost <= O_IDLE;
      endcase
    end
  end

  assign out_valid = (ost == O_HOLD);
  assign out_first = (ost == O_HOLD) && (oidx == '0);

endmodule
