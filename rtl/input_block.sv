// input_block: sample entry of the engine.
//
// How it works.  Samples arrive one per clock on a 16-bit port with a
// valid/ready handshake.  A 4-bit counter numbers them n = 0..15; each
// accepted sample is passed, registered, to the memory management block as a
// write of wr_data at wr_addr = n.  frame_done accompanies the write of
// sample 15.  in_ready follows mem_ready, which the memory management block
// drops while a complete frame is waiting to be moved into the core, so a
// new frame can never overwrite one that has not been transformed yet.
//
// Timing: the write appears one clock after the sample is accepted.
//
// The block's existence and width (16 bits) are the design's; serial entry and
// the handshake are this design's choices.
module input_block
  import fft_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // sample port
  input  logic    in_valid,
  input  sample_t in_data,
  output logic    in_ready,
  // to the memory management block
  input  logic    mem_ready,
  output logic    wr_en,
  output addr_t   wr_addr,
  output sample_t wr_data,
  output logic    frame_done
);

  addr_t count;
  logic  accept;

  assign in_ready = mem_ready;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count      <= '0;
      wr_en      <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
      frame_done <= 1'b0;
    end else begin
      wr_en      <= accept;
      frame_done <= accept && (count == addr_t'(N - 1));
      if (accept) begin
        wr_addr <= count;
        wr_data <= in_data;
        count   <= count + 1'b1;   // wraps from 15 to 0
      end
    end
  end

endmodule
