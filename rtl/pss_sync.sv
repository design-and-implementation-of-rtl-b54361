// pss_sync -- primary-synchronisation-signal correlator of the base station.
//
// The users send a PSS first; the base station cross-correlates the received
// samples with the known PSS and takes the position of the largest
// correlation within one 10 ms frame as the timing reference for all radios.
// That is what the system description gives.  The correlator form is this
// design's choice: the reference is the first L samples of the PSS symbol,
// quantised to one sign bit per I and Q (so each tap is an add/subtract, no
// multiplier), loaded by the host through ref_we/ref_addr/ref_sgn.  The
// metric is |c|^2 of the complex correlation c over the last L samples.
//
// Timing: a sample accepted with sample_en in cycle t enters the delay line at
// t+1; its metric is compared in cycle t+1 together with its frame position
// (the `pos` input, registered).  When the sample at position FRAME-1 has been
// processed, peak_valid pulses for one cycle with the position of the largest
// metric of that frame (first one on ties), its metric, and `found` set if the
// metric exceeded `threshold`.  peak_idx is the frame position of the last
// sample of the correlation window.
module pss_sync
  import mimo_pkg::*;
#(
  parameter int L     = 256,
  parameter int FRAME = N_SUBFRAME * 2 * (N_FFT * N_SYM_SLOT + CP_FIRST + 6 * CP_OTHER),
  localparam int PW   = $clog2(FRAME),
  localparam int AW   = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          sample_en,
  input  cplx_t         sample,
  input  logic [PW-1:0] pos,
  input  logic          ref_we,
  input  logic [AW-1:0] ref_addr,
  input  logic [1:0]    ref_sgn,      // [1]: I negative, [0]: Q negative
  input  logic [63:0]   threshold,
  output logic          peak_valid,
  output logic [PW-1:0] peak_idx,
  output logic [63:0]   peak_metric,
  output logic          found
);
  localparam int CW = SW + AW + 2;

  logic [1:0]    ref_q [L];
  cplx_t         dl    [L];   // dl[L-1] is the newest sample
  logic          v_d;
  logic [PW-1:0] pos_d;

  always_ff @(posedge clk) begin
    if (ref_we) ref_q[ref_addr] <= ref_sgn;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v_d <= 1'b0;
      pos_d <= '0;
      for (int i = 0; i < L; i++) dl[i] <= '0;
    end else begin
      v_d <= sample_en;
      if (sample_en) begin
        pos_d <= pos;
        for (int i = 0; i < L - 1; i++) dl[i] <= dl[i + 1];
        dl[L-1] <= sample;
      end
    end
  end

  // c = sum x[i] * conj(r[i]), r[i] = (+-1) + j(+-1)
  // x*conj(r) = (xr*rr + xi*ri) + j(xi*rr - xr*ri)
  logic signed [CW-1:0] cr, ci;
  logic [63:0] metric;
  always_comb begin
    logic signed [CW-1:0] xr, xi;
    logic signed [63:0] cr2, ci2;
    cr = '0;
    ci = '0;
    for (int i = 0; i < L; i++) begin
      xr = CW'($signed(dl[i].re));
      xi = CW'($signed(dl[i].im));
      cr = cr + (ref_q[i][1] ? -xr : xr) + (ref_q[i][0] ? -xi : xi);
      ci = ci + (ref_q[i][1] ? -xi : xi) - (ref_q[i][0] ? -xr : xr);
    end
    cr2 = 64'(cr);
    ci2 = 64'(ci);
    metric = 64'(cr2 * cr2 + ci2 * ci2);
  end

  logic [63:0]   best;
  logic [PW-1:0] best_idx;
  always_ff @(posedge clk) begin
    if (rst) begin
      best <= '0;
      best_idx <= '0;
      peak_valid <= 1'b0;
      peak_idx <= '0;
      peak_metric <= '0;
      found <= 1'b0;
    end else begin
      peak_valid <= 1'b0;
      if (v_d) begin
        logic [63:0]   b;
        logic [PW-1:0] bi;
        b = best;
        bi = best_idx;
        if (metric > b) begin
          b = metric;
          bi = pos_d;
        end
        if (pos_d == PW'(FRAME - 1)) begin
          peak_valid  <= 1'b1;
          peak_idx    <= bi;
          peak_metric <= b;
          found       <= b > threshold;
          best        <= '0;
          best_idx    <= '0;
        end else begin
          best     <= b;
          best_idx <= bi;
        end
      end
    end
  end

endmodule
