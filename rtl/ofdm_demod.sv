// ofdm_demod -- receive OFDM demodulation of one RF chain: cyclic-prefix
// removal, FFT and guard-subcarrier removal.
//
// The frame timing tells the block which samples are useful: in_valid is set
// for the N samples of a receive symbol that follow its cyclic prefix, with
// in_first on the first of them; in_tag (symbol type and slot information)
// travels with the symbol.  After N samples the symbol is handed to the
// two-bank fft_core (forward transform, each stage scaled by 1/2, so the
// output is DFT/N) and the next symbol can be loaded at once.  When the
// transform is done the NSC used subcarriers are read out in frequency order,
// one per clock: out_sc = 0..NSC-1 maps to bins N-NSC/2..N-1 and 1..NSC/2
// (the DC bin and the band edges are the guard that is dropped).
// Latency: N/2*log2(N) + 2 cycles from the last useful sample to the first
// output; NSC output cycles per symbol.
// CP removal, FFT and guard removal follow the receive chain of the base
// station; bin mapping, scaling and the streaming interface are this design's.
module ofdm_demod
  import mimo_pkg::*;
#(
  parameter int N   = N_FFT,
  parameter int NSC = N_SC,
  parameter int TW  = 8,
  localparam int LG = $clog2(N),
  localparam int UW = $clog2(NSC)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic          in_first,
  input  cplx_t         in_data,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output logic [UW-1:0] out_sc,
  output cplx_t         out_data,
  output logic [TW-1:0] out_tag,
  output logic          overflow
);
  logic [LG-1:0] wcnt;
  logic          load_done;
  logic [TW-1:0] tag_l, tag_c;
  logic          rd_ready, rd_release;
  logic [LG-1:0] rd_addr;
  logic          reading, rd_v;
  logic [UW-1:0] u, u_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      wcnt <= '0;
      load_done <= 1'b0;
      tag_l <= '0;
      tag_c <= '0;
    end else begin
      load_done <= 1'b0;
      if (in_valid) begin
        logic [LG-1:0] a;
        a = in_first ? '0 : wcnt;
        if (in_first) tag_l <= in_tag;
        wcnt <= a + 1'b1;
        if (a == '1) load_done <= 1'b1;
      end
      if (load_done) tag_c <= tag_l;
    end
  end

  wire [LG-1:0] wr_addr = in_first ? '0 : wcnt;

  fft_core #(.N(N)) u_fft (
    .clk, .rst, .inverse(1'b0), .scale_mask('1),
    .wr_en(in_valid), .wr_addr, .wr_data(in_data), .load_done,
    .overflow, .rd_ready, .rd_addr, .rd_data(out_data), .rd_release
  );

  always_comb rd_addr = LG'(sc_to_bin(int'(u), N, NSC));

  always_ff @(posedge clk) begin
    if (rst) begin
      reading <= 1'b0;
      u <= '0;
      u_d <= '0;
      rd_v <= 1'b0;
      rd_release <= 1'b0;
      out_tag <= '0;
    end else begin
      rd_release <= 1'b0;
      rd_v <= 1'b0;
      if (rd_ready && !reading && !rd_release) begin
        reading <= 1'b1;
        u <= '0;
      end
      if (reading) begin
        rd_v <= 1'b1;
        u_d <= u;
        out_tag <= tag_c;
        if (u == UW'(NSC - 1)) begin
          reading <= 1'b0;
          rd_release <= 1'b1;
        end else u <= u + 1'b1;
      end
    end
  end

  assign out_valid = rd_v;
  assign out_sc = u_d;

endmodule
