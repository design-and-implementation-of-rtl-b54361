// ofdm_demod_tb -- feeds two back-to-back 64-sample symbols (48 used
// subcarriers) of random samples, and compares every output subcarrier with
// a DFT/N computed here in floating point (tolerance 3 LSB), checks the
// subcarrier order and tags, and the latency from the last sample to the
// first output (N/2*log2(N) plus a few cycles of pipeline).
module ofdm_demod_tb;
  import mimo_pkg::*;
  localparam int N = 64, NSC = 48, LG = 6;
  logic clk = 0, rst = 1, in_valid = 0, in_first = 0;
  cplx_t in_data = '0, out_data;
  logic [7:0] in_tag = '0, out_tag;
  logic out_valid, overflow;
  logic [5:0] out_sc;
  int checks = 0, failures = 0;
  cplx_t x [2][N];
  int t_last, t_first;

  ofdm_demod #(.N(N), .NSC(NSC)) dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    for (int s = 0; s < 2; s++)
      for (int n = 0; n < N; n++) begin
        x[s][n].re = 16'($signed($urandom_range(0, 16000)) - 8000);
        x[s][n].im = 16'($signed($urandom_range(0, 16000)) - 8000);
      end
    for (int s = 0; s < 2; s++)
      for (int n = 0; n < N; n++) begin
        in_valid <= 1; in_first <= (n == 0); in_data <= x[s][n]; in_tag <= 8'(s + 5);
        @(posedge clk);
        if (s == 0 && n == N - 1) t_last = cyc;
        in_valid <= 0; repeat (7) @(posedge clk);   // one sample per 8 clocks
      end
    in_valid <= 0; in_first <= 0;
  end

  initial begin
    @(negedge rst);
    for (int s = 0; s < 2; s++) begin
      for (int u = 0; u < NSC; u++) begin
        real er, ei, ang;
        int b;
        @(posedge clk iff out_valid);
        if (s == 0 && u == 0) begin
          t_first = cyc;
          chk(t_first - t_last >= N / 2 * LG && t_first - t_last <= N / 2 * LG + 6,
              $sformatf("latency %0d", t_first - t_last));
        end
        b = sc_to_bin(u, N, NSC);
        chk(b == ((u < 24) ? 40 + u : u - 23), "bin mapping");
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          ang = -2.0 * 3.14159265358979 * b * n / N;
          er += x[s][n].re * $cos(ang) - x[s][n].im * $sin(ang);
          ei += x[s][n].re * $sin(ang) + x[s][n].im * $cos(ang);
        end
        er /= N; ei /= N;
        chk(out_sc == 6'(u) && out_tag == 8'(s + 5), "order/tag");
        chk((out_data.re - er) <= 3.0 && (er - out_data.re) <= 3.0 && (out_data.im - ei) <= 3.0 && (ei - out_data.im) <= 3.0,
            $sformatf("sym %0d sc %0d got %0d,%0d exp %f,%f", s, u, int'(out_data.re), int'(out_data.im), er, ei));
      end
    end
    chk(!overflow, "no overflow");
    repeat (5) @(posedge clk);
    chk(!out_valid, "no extra output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
