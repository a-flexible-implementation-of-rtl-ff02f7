// tb_dft_computer: checks the combinational Laurent-series DFT against the
// direct-definition reference (tb_ref_pkg), on the published test vector
// (whose expected words are also compared literally), on random frames of
// small amplitude, and on full-scale frames that must saturate and raise ovf.
module tb_dft_computer;
  import fft_pkg::*;
  import tb_ref_pkg::*;

  sample_t [N-1:0] x, re, im;
  logic            ovf;
  int checks = 0, failures = 0;

  dft_computer dut (.x(x), .re(re), .im(im), .ovf(ovf));

  task automatic check_frame(input frame_t f, input string tag);
    frame_t rre, rim;
    bit     rovf;
    rovf = ref_dft(f, rre, rim);
    for (int n = 0; n < 16; n++) x[n] = f[n];
    #1;
    for (int k = 0; k < 16; k++) begin
      checks++;
      if (re[k] !== rre[k] || im[k] !== rim[k]) begin
        failures++;
        $display("FAIL %s k=%0d got %0d,%0dj exp %0d,%0dj", tag, k, int'(re[k]), int'(im[k]), int'(rre[k]), int'(rim[k]));
      end
    end
    checks++;
    if (ovf !== rovf) begin
      failures++;
      $display("FAIL %s ovf got %0b exp %0b", tag, ovf, rovf);
    end
  endtask

  initial begin
    frame_t f;
    int nsat;
    // Published vector: compare with the words of the DFT trace.
    f = table1_input();
    check_frame(f, "table1");
    for (int k = 0; k < 16; k++) begin
      checks++;
      if ({re[k], im[k]} !== fig_dft_word(k)) begin
        failures++;
        $display("FAIL table1 word k=%0d got %h exp %h", k, {re[k], im[k]}, fig_dft_word(k));
      end
    end
    // Unit impulse and DC.
    for (int n = 0; n < 16; n++) f[n] = (n == 0) ? 16'sd128 : 16'sd0;
    check_frame(f, "impulse");
    for (int n = 0; n < 16; n++) f[n] = 16'sd256;
    check_frame(f, "dc");
    // Random frames within +-16.0: no saturation.
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < 16; n++) f[n] = s16_t'($signed(($urandom % 4096)) - 2048);
      check_frame(f, "rand_small");
    end
    // Random full-scale frames: saturation expected often.
    nsat = 0;
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < 16; n++) f[n] = s16_t'($urandom);
      check_frame(f, "rand_full");
      if (ovf) nsat++;
    end
    checks++;
    if (nsat == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
