// tb_fft_fht16_top: end-to-end test of the engine at its default sizes.
//
// A driver sends frames through the sample port; the selector is set per
// frame (it is sampled when the core starts, after the previous frame has
// left the input memory).  A monitor collects the output words and compares
// each with the direct-definition reference: {Re, Im} for the DFT, {0, Re-Im}
// for the DHT, and the ovf flag.  The published test vector is sent in both
// modes and compared with the words printed in the design's simulation traces.
// The test counts each mechanism and fails if one never happened: DFT and DHT
// frames, a selector change between frames, a stall of the sample port, a
// frame loaded while the previous one was still being written, and a
// saturated frame.  It also checks the latency from the last sample to word
// 0 and the back-to-back frame period.
module tb_fft_fht16_top;
  import fft_pkg::*;
  import tb_ref_pkg::*;

  localparam int FRAMES      = 300;
  localparam int LATENCY     = 19;  // accept edge of sample 15 -> edge presenting word 0
  localparam int MIN_PERIOD  = 18;  // clocks between frames when samples never pause

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  logic      sel_dht = 1'b0;
  logic      in_valid = 1'b0;
  sample_t   in_data = '0;
  logic      in_ready, out_valid, busy, ovf;
  addr_t     out_index;
  out_word_t out_data;
  int checks = 0, failures = 0;

  fft_fht16_top dut (.clk(clk), .rst_n(rst_n), .sel_dht(sel_dht), .in_valid(in_valid),
    .in_data(in_data), .in_ready(in_ready), .out_valid(out_valid), .out_index(out_index),
    .out_data(out_data), .busy(busy), .ovf(ovf));

  always #5 clk = ~clk;

  // Expected results, one entry per frame, in send order.
  logic [31:0] exp_words [FRAMES][16];
  bit          exp_ovf   [FRAMES];
  bit          exp_fig   [FRAMES];   // 1: also compare with the printed trace
  bit          exp_mode  [FRAMES];
  int          t_last    [FRAMES];   // edge at which sample 15 was accepted

  int cyc = 0, sent = 0, got = 0, word = 0;
  int n_dft = 0, n_dht = 0, n_switch = 0, n_stall = 0, n_overlap = 0, n_ovf = 0, n_fig = 0;
  int last_first = -1, min_period = 1 << 30;

  function automatic void chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endfunction

  // Monitor: samples everything at the clock edge.
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (in_valid && !in_ready) n_stall++;
      if (in_valid && in_ready && busy) n_overlap++;
      if (out_valid) begin
        if (got >= sent) begin
          chk(1'b0, "output word with no frame sent");
        end else begin
          chk(out_index === addr_t'(word), $sformatf("frame %0d index %0d exp %0d", got, out_index, word));
          chk(out_data === exp_words[got][word],
              $sformatf("frame %0d mode %0d k=%0d got %h exp %h", got, exp_mode[got], word, out_data, exp_words[got][word]));
          chk(ovf === exp_ovf[got], $sformatf("frame %0d ovf %0b exp %0b", got, ovf, exp_ovf[got]));
          if (exp_fig[got]) begin
            chk(out_data === (exp_mode[got] ? fig_dht_word(word) : fig_dft_word(word)),
                $sformatf("trace word k=%0d got %h", word, out_data));
          end
          if (word == 0) begin
            // word 0 was presented after the previous edge
            chk(cyc - 1 - t_last[got] == LATENCY,
                $sformatf("frame %0d latency %0d exp %0d", got, cyc - 1 - t_last[got], LATENCY));
            if (last_first >= 0 && cyc - last_first < min_period) min_period = cyc - last_first;
            last_first = cyc;
            if (exp_ovf[got]) n_ovf++;
          end
          if (word == 15) begin
            word = 0;
            got++;
          end else begin
            word++;
          end
        end
      end else begin
        chk(word == 0, "gap inside a frame's output");
      end
    end
  end

  task automatic send_frame(input frame_t x, input bit mode, input bit fig, input int gap_pct);
    frame_t re, im;
    bit     o, c;
    o = ref_dft(x, re, im);
    for (int k = 0; k < 16; k++) begin
      if (mode) begin
        exp_words[sent][k] = {16'h0, ref_dht(re[k], im[k], c)};
        o |= c;
      end else begin
        exp_words[sent][k] = {re[k], im[k]};
      end
    end
    exp_ovf[sent]  = o;
    exp_fig[sent]  = fig;
    exp_mode[sent] = mode;
    if (mode) n_dht++; else n_dft++;
    if (fig) n_fig++;
    for (int n = 0; n < 16; n++) begin
      while (($urandom % 100) < gap_pct) begin
        in_valid = 1'b0;
        @(posedge clk); #1;
      end
      in_valid = 1'b1;
      in_data  = x[n];
      @(posedge clk);
      while (!in_ready) @(posedge clk);   // in_ready sampled at this edge
      #1;
      if (n == 0) begin
        // The previous frame has been started in the core: safe to switch.
        if (sel_dht != mode && sent > 0) n_switch++;
        sel_dht = mode;
      end
      if (n == 15) t_last[sent] = cyc;
    end
    in_valid = 1'b0;
    sent++;
  endtask

  initial begin
    frame_t x;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // Published test vector, DHT then DFT, with the printed words.
    x = table1_input();
    send_frame(x, 1'b1, 1'b1, 0);
    send_frame(x, 1'b0, 1'b1, 0);
    for (int f = 2; f < FRAMES; f++) begin
      for (int n = 0; n < 16; n++)
        x[n] = (f % 7 == 3) ? s16_t'($urandom) : s16_t'($signed($urandom % 4096) - 2048);
      send_frame(x, $urandom % 2, 1'b0, (f % 3 == 0) ? 30 : 0);
    end
    while (got < sent && cyc < 100000) @(posedge clk);
    repeat (3) @(posedge clk);
    chk(got == sent, $sformatf("frames out %0d of %0d", got, sent));
    chk(min_period == MIN_PERIOD, $sformatf("back-to-back period %0d exp %0d", min_period, MIN_PERIOD));
    chk(n_dft > 0 && n_dht > 0, "both transforms");
    chk(n_switch > 0, "selector switch");
    chk(n_stall > 0, "input stall");
    chk(n_overlap > 0, "frame loaded during a write");
    chk(n_ovf > 0, "saturated frame");
    chk(n_fig == 2, "trace vectors");
    $display("mechanisms: dft=%0d dht=%0d switch=%0d stall=%0d overlap=%0d ovf=%0d",
             n_dft, n_dht, n_switch, n_stall, n_overlap, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
