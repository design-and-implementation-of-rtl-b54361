// ofdm_mod_tb -- sends two symbols of 48 random subcarriers into a 64-point
// modulator with an 8-sample CP and a converter that accepts a sample every
// third clock, and compares all CP+N output samples with an inverse DFT
// scaled by 1/8 computed here in floating point (tolerance 16 LSB: the rounding of the three scaled first stages is amplified 8x by the three unscaled ones).
module ofdm_mod_tb;
  import mimo_pkg::*;
  localparam int N = 64, NSC = 48, CP = 8;
  logic clk = 0, rst = 1, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid, out_first, overflow;
  logic [5:0] in_sc = '0;
  cplx_t in_data = '0, out_data;
  logic [7:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0;
  cplx_t X [2][NSC];

  ofdm_mod #(.N(N), .NSC(NSC), .CP(CP)) dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) begin cyc++; out_ready <= (cyc % 3 == 0); end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    for (int s = 0; s < 2; s++)
      for (int u = 0; u < NSC; u++) begin
        X[s][u].re = 16'($signed($urandom_range(0, 8000)) - 4000);
        X[s][u].im = 16'($signed($urandom_range(0, 8000)) - 4000);
      end
    for (int s = 0; s < 2; s++)
      for (int u = 0; u < NSC; u++) begin
        in_valid <= 1; in_sc <= 6'(u); in_data <= X[s][u]; in_tag <= 8'(s + 9);
        @(posedge clk iff in_ready);
        in_valid <= 0; repeat (15) @(posedge clk);  // one subcarrier per 16 clocks (faster overruns the readout)
      end
    in_valid <= 0;
  end

  initial begin
    @(negedge rst);
    for (int s = 0; s < 2; s++)
      for (int t = 0; t < N + CP; t++) begin
        real er, ei, ang;
        int xr, xi, gr, gi;
        int n;
        @(posedge clk iff (out_valid && out_ready));
        n = (t < CP) ? N - CP + t : t - CP;
        er = 0; ei = 0;
        for (int u = 0; u < NSC; u++) begin
          ang = 2.0 * 3.14159265358979 * sc_to_bin(u, N, NSC) * n / N;
          xr = X[s][u].re; xi = X[s][u].im;
          er += xr * $cos(ang) - xi * $sin(ang);
          ei += xr * $sin(ang) + xi * $cos(ang);
        end
        er /= 8.0; ei /= 8.0;
        chk(out_first == (t == 0) && out_tag == 8'(s + 9), "first/tag");
        gr = out_data.re; gi = out_data.im;
        chk((gr - er) <= 16.0 && (er - gr) <= 16.0 && (gi - ei) <= 16.0 && (ei - gi) <= 16.0,
            $sformatf("sym %0d t %0d got %0d,%0d exp %f,%f", s, t, int'(out_data.re), int'(out_data.im), er, ei));
      end
    chk(!overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
