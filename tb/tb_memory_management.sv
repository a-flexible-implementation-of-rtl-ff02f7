// tb_memory_management: plays the input block and the core around the memory
// management block.  For each frame it writes 16 samples, checks that
// mem_ready drops with frame_done, that core_load follows one clock later
// with the whole frame on core_x, that done comes 17 clocks after core_load,
// and then reads the output memory: {Re, Im} words for the DFT, {0, Re - Im}
// saturated for the DHT, and done_ovf.  The selector changes between frames.
module tb_memory_management;
  import fft_pkg::*;
  import tb_ref_pkg::*;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            sel_dht = 1'b0;
  logic            wr_en = 1'b0, frame_done = 1'b0;
  addr_t           wr_addr = '0, rd_addr = '0;
  sample_t         wr_data = '0;
  logic            mem_ready, core_load, busy, done, done_ovf;
  sample_t [N-1:0] core_x, real_part = '0, img_part = '0;
  logic            core_ovf = 1'b0;
  out_word_t       rd_data;
  int checks = 0, failures = 0;

  memory_management dut (.clk(clk), .rst_n(rst_n), .sel_dht(sel_dht), .wr_en(wr_en),
    .wr_addr(wr_addr), .wr_data(wr_data), .frame_done(frame_done), .mem_ready(mem_ready),
    .core_load(core_load), .core_x(core_x), .real_part(real_part), .img_part(img_part),
    .core_ovf(core_ovf), .rd_addr(rd_addr), .rd_data(rd_data), .busy(busy), .done(done),
    .done_ovf(done_ovf));

  always #5 clk = ~clk;

  function automatic void chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endfunction

  initial begin
    frame_t f, re, im;
    bit     ovf_in, exp_ovf, c;
    int     t_load, mode_sw;
    logic   prev_sel;
    mode_sw = 0;
    prev_sel = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int fr = 0; fr < 60; fr++) begin
      for (int n = 0; n < 16; n++) f[n] = s16_t'($urandom);
      sel_dht = $urandom % 2;
      if (sel_dht != prev_sel) mode_sw++;
      prev_sel = sel_dht;
      // Input block side: 16 writes with random gaps.
      for (int n = 0; n < 16; n++) begin
        chk(mem_ready === 1'b1, "mem_ready low while loading");
        wr_en = 1'b1; wr_addr = addr_t'(n); wr_data = f[n]; frame_done = (n == 15);
        if (n == 15) begin
          #1 chk(mem_ready === 1'b0, "mem_ready high with frame_done");
        end
        @(posedge clk); #1;
        wr_en = 1'b0; frame_done = 1'b0;
        if (n != 15) begin
          repeat ($urandom % 2) @(posedge clk);
          #1;
        end
      end
      // Core side: core_load must be high in the cycle after frame_done.
      chk(core_load === 1'b1, "core_load not one clock after frame_done");
      chk(mem_ready === 1'b0, "mem_ready high before core_load");
      for (int n = 0; n < 16; n++) chk(core_x[n] === f[n], "core_x");
      // Core result: random parts, some large enough for the DHT to clip.
      for (int k = 0; k < 16; k++) begin
        re[k] = (fr % 4 == 3) ? s16_t'($urandom) : s16_t'($signed($urandom % 4096) - 2048);
        im[k] = (fr % 4 == 3) ? s16_t'($urandom) : s16_t'($signed($urandom % 4096) - 2048);
      end
      ovf_in = ($urandom % 4) == 0;
      @(posedge clk);
      t_load = 0;
      for (int k = 0; k < 16; k++) begin real_part[k] = re[k]; img_part[k] = im[k]; end
      core_ovf = ovf_in;
      #1 chk(mem_ready === 1'b1, "mem_ready low after core_load");
      chk(busy === 1'b1, "busy low while writing");
      while (!done && t_load < 40) begin @(posedge clk); #1; t_load++; end
      // done is high 16 edges after the edge that samples core_load
      chk(t_load == 16, $sformatf("done latency %0d edges", t_load));
      exp_ovf = ovf_in;
      for (int k = 0; k < 16; k++) begin
        logic [31:0] w;
        rd_addr = addr_t'(k);
        #1;
        if (sel_dht) begin
          w = {16'h0, ref_dht(re[k], im[k], c)};
          exp_ovf |= c;
        end else begin
          w = {re[k], im[k]};
        end
        chk(rd_data === w, $sformatf("word k=%0d got %h exp %h", k, rd_data, w));
      end
      chk(done_ovf === exp_ovf, "done_ovf");
      @(posedge clk); #1;
      chk(done === 1'b0 && busy === 1'b0, "done not a single pulse / busy");
    end
    chk(mode_sw > 5, "selector never switched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
