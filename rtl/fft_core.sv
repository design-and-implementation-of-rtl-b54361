// fft_core -- in-place radix-2 decimation-in-time FFT/IFFT with two banks.
//
// Shared by the OFDM demodulator (forward FFT) and modulator (inverse FFT).
// One bank is loaded while the other is transformed and read out, so a new
// symbol can be written while the previous one is still being processed.
//
// Load side: wr_en/wr_addr/wr_data write bin or sample wr_addr (natural
// order; the core stores it bit-reversed).  load_done marks the bank full: if
// the other bank is free the transform starts and the banks swap; otherwise
// `overflow` pulses and the symbol is dropped.
// Transform: log2(N) stages of N/2 butterflies, one butterfly per clock, so a
// transform takes N/2*log2(N) cycles (11264 for N = 2048).  `inverse` selects
// conjugate twiddles; scale_mask bit s halves the results of stage s (with
// rounding) -- all ones gives DFT/N, zero gives the plain sum.  Data are held
// with IW bits per component and saturated to 16 bits on read.
// Read side: rd_ready rises when the transform has finished; rd_addr selects
// the (natural order) output, rd_data follows one cycle later; rd_release
// frees the bank.
// Twiddles are computed at elaboration (Q1.15 cos/sin table of N/2 entries).
// The radix-2 in-place structure is this design's choice; the system
// description only names the 2048-point FFT.
module fft_core
  import mimo_pkg::*;
#(
  parameter int N  = N_FFT,
  parameter int IW = 24,
  localparam int LG = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          inverse,
  input  logic [LG-1:0] scale_mask,
  input  logic          wr_en,
  input  logic [LG-1:0] wr_addr,
  input  cplx_t         wr_data,
  input  logic          load_done,
  output logic          overflow,
  output logic          rd_ready,
  input  logic [LG-1:0] rd_addr,
  output cplx_t         rd_data,
  input  logic          rd_release
);
  typedef struct packed {
    logic signed [IW-1:0] re;
    logic signed [IW-1:0] im;
  } wcplx_t;

  typedef logic signed [15:0] tw_t [N/2];
  function automatic tw_t mk_cos();
    tw_t r;
    for (int i = 0; i < N / 2; i++) r[i] = 16'($rtoi($floor($cos(2.0 * 3.14159265358979 * i / N) * 32767.0 + 0.5)));
    return r;
  endfunction
  function automatic tw_t mk_sin();
    tw_t r;
    for (int i = 0; i < N / 2; i++) r[i] = 16'($rtoi($floor($sin(2.0 * 3.14159265358979 * i / N) * 32767.0 + 0.5)));
    return r;
  endfunction
  localparam tw_t TW_COS = mk_cos();
  localparam tw_t TW_SIN = mk_sin();

  function automatic logic [LG-1:0] bitrev(logic [LG-1:0] a);
    for (int i = 0; i < LG; i++) bitrev[i] = a[LG-1-i];
  endfunction

  function automatic logic signed [IW-1:0] satw(logic signed [63:0] v);
    if (v > 64'((1 <<< (IW - 1)) - 1)) return IW'((1 <<< (IW - 1)) - 1);
    if (v < -64'(1 <<< (IW - 1)))      return IW'(-(1 <<< (IW - 1)));
    return IW'(v);
  endfunction

  wcplx_t mem [2][N];
  logic   lbank;          // bank being loaded
  logic   busy;           // compute bank is being transformed or read
  logic   computing;
  logic   inv_q;
  logic [LG-1:0] mask_q;
  logic [$clog2(LG+1)-1:0] stage;
  logic [LG-2:0] bfly;

  wire cbank = ~lbank;

  always_ff @(posedge clk) begin
    if (rst) begin
      lbank <= 1'b0;
      busy <= 1'b0;
      computing <= 1'b0;
      rd_ready <= 1'b0;
      overflow <= 1'b0;
      stage <= '0;
      bfly <= '0;
      inv_q <= 1'b0;
      mask_q <= '0;
    end else begin
      overflow <= 1'b0;
      if (wr_en) mem[lbank][bitrev(wr_addr)] <= '{re: IW'($signed(wr_data.re)), im: IW'($signed(wr_data.im))};
      if (rd_release) begin
        busy <= 1'b0;
        rd_ready <= 1'b0;
      end
      if (load_done) begin
        if (busy && !rd_release) overflow <= 1'b1;
        else begin
          lbank <= ~lbank;
          busy <= 1'b1;
          computing <= 1'b1;
          stage <= '0;
          bfly <= '0;
          inv_q <= inverse;
          mask_q <= scale_mask;
        end
      end
      if (computing) begin
        // one butterfly on the compute bank
        logic [LG-1:0] half, j, i0, i1, k;
        logic signed [63:0] tr, ti, ar, ai, br, bi;
        wcplx_t x0, x1;
        logic signed [15:0] wc, ws;
        half = LG'(1) << stage;
        j  = LG'(bfly) & (half - LG'(1));
        i0 = ((LG'(bfly) >> stage) << (stage + 1)) | j;
        i1 = i0 | half;
        k  = j << (LG - 1 - stage);
        x0 = mem[cbank][i0];
        x1 = mem[cbank][i1];
        wc = TW_COS[k[LG-2:0]];
        ws = inv_q ? TW_SIN[k[LG-2:0]] : -TW_SIN[k[LG-2:0]];
        tr = (64'($signed(x1.re)) * 64'(wc) - 64'($signed(x1.im)) * 64'(ws) + 64'sd16384) >>> 15;
        ti = (64'($signed(x1.re)) * 64'(ws) + 64'($signed(x1.im)) * 64'(wc) + 64'sd16384) >>> 15;
        ar = 64'($signed(x0.re)) + tr;  ai = 64'($signed(x0.im)) + ti;
        br = 64'($signed(x0.re)) - tr;  bi = 64'($signed(x0.im)) - ti;
        if (mask_q[stage[$clog2(LG)-1:0]]) begin
          ar = (ar + 1) >>> 1; ai = (ai + 1) >>> 1;
          br = (br + 1) >>> 1; bi = (bi + 1) >>> 1;
        end
        mem[cbank][i0] <= '{re: satw(ar), im: satw(ai)};
        mem[cbank][i1] <= '{re: satw(br), im: satw(bi)};
        if (bfly == '1) begin
          bfly <= '0;
          if (stage == ($clog2(LG+1))'(LG - 1)) begin
            computing <= 1'b0;
            rd_ready <= 1'b1;
          end else stage <= stage + 1'b1;
        end else bfly <= bfly + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    wcplx_t v;
    v = mem[cbank][rd_addr];
    rd_data <= '{re: sat(64'($signed(v.re))), im: sat(64'($signed(v.im)))};
  end

endmodule
