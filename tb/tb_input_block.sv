// tb_input_block: offers samples with random gaps while mem_ready toggles,
// and checks the handshake (in_ready = mem_ready), that each accepted sample
// is written one clock later at the next index 0..15, and that frame_done
// comes exactly with the write of index 15.
module tb_input_block;
  import fft_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t in_data = '0;
  logic    in_ready;
  logic    mem_ready = 1'b1;
  logic    wr_en, frame_done;
  addr_t   wr_addr;
  sample_t wr_data;
  int checks = 0, failures = 0;

  input_block dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
                   .in_ready(in_ready), .mem_ready(mem_ready), .wr_en(wr_en),
                   .wr_addr(wr_addr), .wr_data(wr_data), .frame_done(frame_done));

  always #5 clk = ~clk;

  // Expected write for the next cycle, from what was accepted in this one.
  logic    exp_en = 1'b0, exp_done = 1'b0;
  int      exp_idx = 0, next_idx = 0, frames = 0, stalls = 0;
  sample_t exp_data;

  always @(posedge clk) begin
    if (rst_n) begin
      checks += 2;
      if (in_ready !== mem_ready) begin failures++; $display("FAIL in_ready"); end
      if (wr_en !== exp_en || frame_done !== exp_done) begin
        failures++;
        $display("FAIL wr_en %0b/%0b frame_done %0b/%0b", wr_en, exp_en, frame_done, exp_done);
      end
      if (exp_en) begin
        checks++;
        if (wr_addr !== addr_t'(exp_idx) || wr_data !== exp_data) begin
          failures++;
          $display("FAIL write addr %0d/%0d data %h/%h", wr_addr, exp_idx, wr_data, exp_data);
        end
      end
      if (frame_done) frames++;
      if (in_valid && !in_ready) stalls++;
      exp_en   <= in_valid && mem_ready;
      exp_done <= in_valid && mem_ready && next_idx == 15;
      if (in_valid && mem_ready) begin
        exp_idx  <= next_idx;
        exp_data <= in_data;
        next_idx <= (next_idx + 1) % 16;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      in_valid  = ($urandom % 4) != 0;
      in_data   = sample_t'($urandom);
      mem_ready = ($urandom % 5) != 0;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (2) @(posedge clk);
    checks++;
    if (frames < 10 || stalls == 0) begin
      failures++;
      $display("FAIL coverage frames=%0d stalls=%0d", frames, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
