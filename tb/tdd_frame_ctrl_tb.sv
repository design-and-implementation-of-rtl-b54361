// tdd_frame_ctrl_tb -- walks a scaled-down frame (16-point symbols, CP 4/2,
// 3 subframes) and compares every decoded field with a reference produced by
// nested loops over subframe/slot/symbol/sample; then checks that an align
// pulse moves the frame by PEAK_POS - align_idx; finally runs one full-size
// frame (307200 samples) and checks the frame length and the number of
// downlink symbols.
module tdd_frame_ctrl_tb;
  import mimo_pkg::*;
  localparam int NFFT = 16, CP0 = 4, CP1 = 2, NSF = 3, PEAK = 7;
  localparam int SLOT = (NFFT + CP0) + 6 * (NFFT + CP1);
  localparam int FRAME = NSF * 2 * SLOT;
  localparam int PW = $clog2(FRAME);
  logic clk = 0, rst = 1, sample_en = 0, align = 0;
  logic [PW-1:0] align_idx = '0, pos;
  logic [3:0] subframe; logic slot; logic [2:0] sym;
  logic [$clog2(NFFT+CP0)-1:0] samp, cp_len;
  sym_type_e sym_type; logic in_cp, useful_first, tx_en, frame_start;
  int checks = 0, failures = 0;

  tdd_frame_ctrl #(.NFFT(NFFT), .CP0(CP0), .CP1(CP1), .NSF(NSF), .PEAK_POS(PEAK)) dut (.*);

  // full-size instance
  logic [18:0] pos_f, aidx_f = '0;
  logic [3:0] sf_f; logic sl_f; logic [2:0] sy_f; logic [11:0] sa_f, cl_f;
  sym_type_e st_f; logic ic_f, uf_f, tx_f, fs_f;
  tdd_frame_ctrl full (.clk, .rst, .sample_en, .align(1'b0), .align_idx(aidx_f), .pos(pos_f),
    .subframe(sf_f), .slot(sl_f), .sym(sy_f), .samp(sa_f), .cp_len(cl_f), .sym_type(st_f),
    .in_cp(ic_f), .useful_first(uf_f), .tx_en(tx_f), .frame_start(fs_f));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic sym_type_e ref_type(int sf, int sl, int sy);
    if (sf == 0) return (sl == 0 && sy == 0) ? SYM_PSS : SYM_GUARD;
    case (sy)
      0: return SYM_UL_PILOT;
      1, 2: return SYM_UL_DATA;
      4: return SYM_DL_PILOT;
      5: return SYM_DL_DATA;
      default: return SYM_GUARD;
    endcase
  endfunction

  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int dl_syms, frames;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // reference walk over two frames
    for (int f = 0; f < 2; f++)
      for (int sf = 0; sf < NSF; sf++)
        for (int sl = 0; sl < 2; sl++)
          for (int sy = 0; sy < 7; sy++) begin
            automatic int cp = (sy == 0) ? CP0 : CP1;
            for (int s = 0; s < cp + NFFT; s++) begin
              #1;
              chk(subframe == 4'(sf) && slot == sl[0] && sym == 3'(sy) && samp == 5'(s),
                  $sformatf("position sf%0d sl%0d sy%0d s%0d got %0d %0d %0d %0d", sf, sl, sy, s, subframe, slot, sym, samp));
              chk(sym_type == ref_type(sf, sl, sy), "sym_type");
              chk(in_cp == (s < cp) && useful_first == (s == cp), "cp flags");
              chk(tx_en == (ref_type(sf, sl, sy) inside {SYM_DL_PILOT, SYM_DL_DATA}), "tx_en");
              chk(frame_start == (sf == 0 && sl == 0 && sy == 0 && s == 0), "frame_start");
              sample_en <= 1; @(posedge clk); sample_en <= 0;
            end
          end
    // alignment: the peak was seen at frame position 40; afterwards the
    // sample that followed it must sit at PEAK+1
    repeat (40) begin sample_en <= 1; @(posedge clk); end
    sample_en <= 0; #1;
    chk(pos == 40, "pos before align");
    align_idx <= 40; align <= 1; sample_en <= 1; @(posedge clk);
    align <= 0; sample_en <= 0; #1;
    chk(pos == PEAK + 1, $sformatf("pos after align %0d", pos));
    align_idx <= 2; align <= 1; @(posedge clk); align <= 0; #1;   // wrap case
    chk(pos == (PEAK + 1 + PEAK - 2) % FRAME, "pos after second align");
    align_idx <= 100; align <= 1; @(posedge clk); align <= 0; #1;
    chk(pos == (2 * PEAK + 1 - 2 + PEAK - 100 + FRAME) % FRAME, "pos after wrap align");
    // full-size frame
    rst <= 1; @(posedge clk); rst <= 0; @(posedge clk);
    dl_syms = 0; frames = 0;
    for (int i = 0; i < 307200; i++) begin
      #1;
      if (uf_f && st_f == SYM_DL_DATA) dl_syms++;
      sample_en <= 1; @(posedge clk);
    end
    sample_en <= 0; #1;
    chk(fs_f && pos_f == 0, "full frame wraps after 307200 samples");
    chk(dl_syms == 18, $sformatf("DL data symbols per frame %0d", dl_syms));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
