// output_block: result port of the engine.
//
// How it works.  A start pulse (the memory management block's done) says the
// output memory holds a complete transform.  The block then reads the 16
// words in address order, k = 0..15, one per clock, and presents each on the
// 32-bit out_data port with out_valid and its index out_index.  The memory is
// read combinationally through rd_addr and the word is registered here.  A
// start during a read-out restarts it at k = 0.
//
// Timing: word 0 is on the port right after the clock edge that samples
// start, word k k cycles later; 16 cycles per transform; no back-pressure.
//
// The 32-bit output width is the design's; streaming the words out in order
// is this design's choice.
module output_block
  import fft_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  // output memory read port
  output addr_t     rd_addr,
  input  out_word_t rd_data,
  // result port
  output logic      out_valid,
  output addr_t     out_index,
  output out_word_t out_data
);

  logic  active;
  addr_t addr;

  assign rd_addr = start ? '0 : addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active    <= 1'b0;
      addr      <= '0;
      out_valid <= 1'b0;
      out_index <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= start || active;
      if (start || active) begin
        out_index <= rd_addr;
        out_data  <= rd_data;
      end
      if (start) begin
        active <= 1'b1;
        addr   <= addr_t'(1);
      end else if (active) begin
        addr <= addr + 1'b1;
        if (addr == addr_t'(N - 1)) active <= 1'b0;
      end
    end
  end

endmodule
