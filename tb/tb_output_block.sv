// tb_output_block: gives the output block a memory model, pulses start and
// checks that the 16 words come out in order k = 0..15, one per clock, from
// the edge that samples start, with out_valid low before and after; also a
// start in the middle of a read-out, which must restart it at k = 0.
module tb_output_block;
  import fft_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  logic      start = 1'b0;
  addr_t     rd_addr;
  out_word_t rd_data;
  logic      out_valid;
  addr_t     out_index;
  out_word_t out_data;
  out_word_t mem [16];
  int checks = 0, failures = 0;

  assign rd_data = mem[rd_addr];

  output_block dut (.clk(clk), .rst_n(rst_n), .start(start), .rd_addr(rd_addr),
                    .rd_data(rd_data), .out_valid(out_valid), .out_index(out_index),
                    .out_data(out_data));

  always #5 clk = ~clk;

  function automatic void chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endfunction

  initial begin
    int cut;
    for (int i = 0; i < 16; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int r = 0; r < 40; r++) begin
      for (int i = 0; i < 16; i++) mem[i] = $urandom;
      repeat (1 + $urandom % 3) begin @(posedge clk); #1 chk(out_valid === 1'b0, "idle valid"); end
      start = 1'b1;
      cut = (r % 5 == 4) ? 3 + $urandom % 10 : 99;
      for (int k = 0; k < 16; k++) begin
        @(posedge clk); #1;
        start = 1'b0;
        if (k == cut) begin
          // restart: the word after this one must be k = 0 again
          start = 1'b1;
          k = -1;
          cut = 99;
          chk(out_valid === 1'b1, "valid at restart");
          continue;
        end
        chk(out_valid === 1'b1 && out_index === addr_t'(k) && out_data === mem[k],
            $sformatf("word %0d got v=%0b i=%0d %h exp %h", k, out_valid, out_index, out_data, mem[k]));
      end
      @(posedge clk); #1 chk(out_valid === 1'b0, "valid after word 15");
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
