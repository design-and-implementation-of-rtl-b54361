// pss_sync_tb -- loads a random 16-tap sign reference, streams frames of 300
// samples of small random noise with the reference (scaled by 1000) embedded
// ending at a chosen position, and checks the reported peak position, the
// peak metric against a correlation computed here, and the threshold flag.
// A third frame without any PSS must report found = 0.
module pss_sync_tb;
  import mimo_pkg::*;
  localparam int L = 16, FRAME = 300, PW = $clog2(FRAME);
  logic clk = 0, rst = 1, sample_en = 0, ref_we = 0;
  cplx_t sample = '0;
  logic [PW-1:0] pos = '0, peak_idx;
  logic [3:0] ref_addr = '0;
  logic [1:0] ref_sgn = '0;
  logic [63:0] threshold, peak_metric;
  logic peak_valid, found;
  int checks = 0, failures = 0;
  logic [1:0] refs [L];
  cplx_t frame_s [FRAME];

  pss_sync #(.L(L), .FRAME(FRAME)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint corr_metric(int endpos);
    longint cr = 0, ci = 0;
    for (int i = 0; i < L; i++) begin
      int p = endpos - L + 1 + i;
      longint xr = (p >= 0) ? frame_s[p].re : 0, xi = (p >= 0) ? frame_s[p].im : 0;
      longint rr = refs[i][1] ? -1 : 1, ri = refs[i][0] ? -1 : 1;
      cr += xr * rr + xi * ri;
      ci += xi * rr - xr * ri;
    end
    return cr * cr + ci * ci;
  endfunction

  task automatic run_frame(int endpos, bit with_pss);
    for (int n = 0; n < FRAME; n++) begin
      frame_s[n].re = 16'($signed($urandom_range(0, 40)) - 20);
      frame_s[n].im = 16'($signed($urandom_range(0, 40)) - 20);
    end
    if (with_pss)
      for (int i = 0; i < L; i++) begin
        frame_s[endpos - L + 1 + i].re += refs[i][1] ? -16'sd1000 : 16'sd1000;
        frame_s[endpos - L + 1 + i].im += refs[i][0] ? -16'sd1000 : 16'sd1000;
      end
    for (int n = 0; n < FRAME; n++) begin
      sample <= frame_s[n]; pos <= PW'(n); sample_en <= 1; @(posedge clk);
      sample_en <= 0; @(posedge clk);
    end
  endtask

  initial begin
    longint best; int bi;
    threshold = 64'd100000000;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < L; i++) begin
      refs[i] = 2'($urandom);
      ref_we <= 1; ref_addr <= 4'(i); ref_sgn <= refs[i]; @(posedge clk);
    end
    ref_we <= 0;
    for (int t = 0; t < 3; t++) begin
      automatic int ep = (t == 0) ? 137 : (t == 1) ? 20 : 0;
      fork
        run_frame(ep, t < 2);
        begin
          @(posedge clk iff peak_valid); #1;
          best = -1; bi = 0;
          for (int n = 0; n < FRAME; n++) if (corr_metric(n) > best) begin best = corr_metric(n); bi = n; end
          if (t < 2) begin
            chk(peak_idx == PW'(ep), $sformatf("peak index %0d expected %0d", peak_idx, ep));
            chk(found, "found with PSS");
          end else chk(!found, "no PSS: not found");
          chk(peak_idx == PW'(bi), $sformatf("peak index %0d vs reference argmax %0d", peak_idx, bi));
          chk(peak_metric == 64'(best), $sformatf("metric %0d vs %0d", peak_metric, best));
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
