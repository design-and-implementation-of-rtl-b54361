// bs_top_tb -- end-to-end run of the node baseband at reduced size (2
// antennas, 64-point FFT, 48 subcarriers, CP 8/4, 2 subframes per frame,
// 16-tap PSS correlator, one sample every 8 clocks).  The "users" transmit a
// frame whose start is 500 samples later than the base station's own count:
// a PSS in symbol 0 of subframe 0 and random QPSK-like uplink symbols
// elsewhere.  The test counts the mechanisms of the design and fails any that
// never happens: PSS detection and frame re-alignment, uplink symbols
// demodulated per antenna, downlink symbols modulated and transmitted during
// downlink slots only.  It checks that after alignment the PSS peak sits at
// its nominal position, that each demodulated uplink symbol carries an uplink
// tag and all NSC subcarriers, and that no FFT overflow occurs.
module bs_top_tb;
  import mimo_pkg::*;
  localparam int NANT = 2, NFFT = 64, NSC = 48, CP0 = 8, CP1 = 4, NSF = 2, L = 16;
  localparam int SLOT = 7 * NFFT + CP0 + 6 * CP1, FRAME = NSF * 2 * SLOT;
  localparam int PW = $clog2(FRAME), UW = $clog2(NSC), D = 500;
  logic clk = 0, rst = 1, rx_valid = 0, ref_we = 0, dl_valid = 0;
  cplx_t rx_data [NANT];
  logic [3:0] ref_addr = '0;
  logic [1:0] ref_sgn = '0;
  logic [63:0] threshold = 64'd20000000;
  logic [PW-1:0] frame_pos, sync_idx;
  sym_type_e sym_type;
  logic tx_en, sync_valid, sync_found, dl_ready, tx_valid, tx_first, dl_overflow;
  logic [NANT-1:0] ul_valid, ul_overflow;
  logic [UW-1:0] ul_sc [NANT];
  cplx_t ul_data [NANT];
  logic [7:0] ul_tag [NANT];
  logic [UW-1:0] dl_sc = '0;
  cplx_t dl_data = '0, tx_data;
  logic [1:0] refs [L];
  int checks = 0, failures = 0;
  int n_align = 0, n_sync = 0, n_ul [NANT], n_sc [NANT], n_tx_sym = 0, n_tx_samp = 0, n_ovf = 0;

  bs_top #(.NANT(NANT), .NFFT(NFFT), .NSC(NSC), .CP0(CP0), .CP1(CP1), .NSF(NSF), .L(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial for (int a = 0; a < NANT; a++) begin n_ul[a] = 0; n_sc[a] = 0; rx_data[a] = '0; end

  // monitors
  always @(posedge clk) if (!rst) begin
    if (sync_valid) begin
      n_sync++;
      if (sync_found) n_align++;
      if (n_sync >= 2) chk(sync_found && sync_idx == PW'(CP0 + L - 1),
                            $sformatf("aligned PSS peak at %0d", sync_idx));
    end
    for (int a = 0; a < NANT; a++) if (ul_valid[a]) begin
      n_sc[a]++;
      if (ul_sc[a] == '0) begin
        n_ul[a]++;
        chk(ul_tag[a][2:0] inside {3'd0, 3'd1, 3'd2} && ul_tag[a][7:4] != 4'd0, "uplink tag");
      end
    end
    if (tx_valid) begin
      n_tx_samp++;
      chk(tx_en && sym_type inside {SYM_DL_PILOT, SYM_DL_DATA}, "transmit only in downlink symbols");
      if (tx_first) n_tx_sym++;
    end
    if (|ul_overflow || dl_overflow) n_ovf++;
  end

  // downlink host: one symbol ahead of the transmitter
  initial begin
    @(negedge rst);
    forever begin
      for (int u = 0; u < NSC; u++) begin
        dl_valid <= 1; dl_sc <= UW'(u);
        dl_data <= '{re: (u % 2) ? 16'sd2000 : -16'sd2000, im: (u % 3) ? 16'sd2000 : -16'sd2000};
        @(posedge clk iff dl_ready);
      end
      dl_valid <= 0;
      @(posedge clk iff tx_first);
    end
  end

  // users' transmission as seen by the antennas; user frame starts at D
  function automatic cplx_t user_sample(int t, int a);
    int p, s, sf, sl, sy, o;
    cplx_t v;
    p = (t - D + 3 * FRAME) % FRAME;
    sf = p / (2 * SLOT); s = p % (2 * SLOT); sl = s / SLOT; s = s % SLOT;
    if (s < NFFT + CP0) begin sy = 0; o = s; end
    else begin sy = (s - NFFT - CP0) / (NFFT + CP1) + 1; o = (s - NFFT - CP0) % (NFFT + CP1); end
    v = '0;
    if (sf == 0 && sl == 0 && sy == 0 && o >= CP0 && o < CP0 + L) begin
      v.re = refs[o - CP0][1] ? -16'sd1500 : 16'sd1500;
      v.im = refs[o - CP0][0] ? -16'sd1500 : 16'sd1500;
    end else if (sf != 0 && sy <= 2) begin
      v.re = 16'($signed($urandom_range(0, 1600)) - 800);
      v.im = 16'($signed($urandom_range(0, 1600)) - 800);
    end
    if (a == 1) v.re = -v.re;
    return v;
  endfunction

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < L; i++) begin
      refs[i] = 2'($urandom);
      ref_we <= 1; ref_addr <= 4'(i); ref_sgn <= refs[i]; @(posedge clk);
    end
    ref_we <= 0;
    for (int t = 0; t < 4 * FRAME; t++) begin
      for (int a = 0; a < NANT; a++) rx_data[a] <= user_sample(t, a);
      rx_valid <= 1; @(posedge clk);
      rx_valid <= 0; repeat (7) @(posedge clk);
    end
    repeat (600) @(posedge clk);
    $display("mechanisms: sync=%0d align=%0d ul_sym=%0d/%0d ul_sc=%0d dl_sym=%0d tx_samples=%0d overflow=%0d",
             n_sync, n_align, n_ul[0], n_ul[1], n_sc[0], n_tx_sym, n_tx_samp, n_ovf);
    chk(n_sync == 4, "one sync report per frame");
    chk(n_align >= 1, "re-alignment happened");
    for (int a = 0; a < NANT; a++) begin
      chk(n_ul[a] >= 3 * (NSF - 1) * 2 * 2, $sformatf("uplink symbols demodulated on antenna %0d", a));
      chk(n_sc[a] == n_ul[a] * NSC, "all subcarriers of each uplink symbol");
    end
    chk(n_tx_sym >= 2, "downlink symbols transmitted");
    chk(n_tx_samp >= n_tx_sym * NFFT, "downlink samples transmitted");
    chk(n_ovf == 0, "no FFT overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
