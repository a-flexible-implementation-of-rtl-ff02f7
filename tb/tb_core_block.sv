// tb_core_block: loads random frames into the core and checks that the Real
// Part / Img Part registers hold the reference transform one clock after the
// load, keep it while load is low, and that valid and ovf follow.
module tb_core_block;
  import fft_pkg::*;
  import tb_ref_pkg::*;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            load = 1'b0;
  sample_t [N-1:0] x = '0;
  sample_t [N-1:0] real_part, img_part;
  logic            valid, ovf;
  int checks = 0, failures = 0;

  core_block dut (.clk(clk), .rst_n(rst_n), .load(load), .x(x),
                  .real_part(real_part), .img_part(img_part), .valid(valid), .ovf(ovf));

  always #5 clk = ~clk;

  task automatic expect_parts(input frame_t rre, input frame_t rim, input bit rovf, input string tag);
    for (int k = 0; k < 16; k++) begin
      checks++;
      if (real_part[k] !== rre[k] || img_part[k] !== rim[k]) begin
        failures++;
        $display("FAIL %s k=%0d got %h,%h exp %h,%h", tag, k, real_part[k], img_part[k], rre[k], rim[k]);
      end
    end
    checks += 2;
    if (valid !== 1'b1) begin failures++; $display("FAIL %s valid low", tag); end
    if (ovf !== rovf)   begin failures++; $display("FAIL %s ovf %0b exp %0b", tag, ovf, rovf); end
  endtask

  initial begin
    frame_t f, rre, rim;
    bit     rovf;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (valid !== 1'b0) begin failures++; $display("FAIL valid after reset"); end
    for (int t = 0; t < 200; t++) begin
      for (int n = 0; n < 16; n++) f[n] = (t % 3 == 2) ? s16_t'($urandom) : s16_t'($signed($urandom % 8192) - 4096);
      rovf = ref_dft(f, rre, rim);
      for (int n = 0; n < 16; n++) x[n] = f[n];
      load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      expect_parts(rre, rim, rovf, "load");
      // Change the input without load: the parts must hold.
      for (int n = 0; n < 16; n++) x[n] = s16_t'($urandom);
      repeat (1 + $urandom % 3) @(posedge clk);
      #1 expect_parts(rre, rim, rovf, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
