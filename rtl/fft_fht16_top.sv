// fft_fht16_top: 16-point fast Fourier / Hartley transform engine.
//
// The engine transforms blocks of 16 real samples (signed 16-bit, 7 fraction
// bits) into either the DFT (16 complex coefficients) or the DHT (16 real
// coefficients), chosen by a single selection bit.  The DFT is computed with
// a matrix Laurent series: the DFT matrix is split by a bit-selection operator
// into matrices whose entries are 0, +-1, +-j, so that the only true
// multiplications are by cos(pi/8), sin(pi/8) and cos(pi/4).  The DHT is
// formed from the DFT as H_k = Re V_k - Im V_k.
//
// Blocks, wired as in the design's block diagram:
//   input_block        sample port, numbers the samples 0..15
//   memory_management  input memory, output memory, controller, DFT/DHT
//                      selection and packing
//   core_block         DFT computer + Real Part / Img Part registers
//   output_block       streams the 16 output words out
//
// Interface.  Samples: in_valid / in_ready / in_data, one per clock, sample 0
// first.  Results: out_valid / out_index / out_data, 16 words in order
// k = 0..15.  DFT word = {Re V_k, Im V_k}; DHT word = {16'b0, H_k}; each
// component signed Q8.7, saturated.  ovf is high with the words of a frame
// in which some value was saturated.  sel_dht (1 = DHT) is sampled when the
// core starts on a frame.
//
// Timing: word 0 is presented 19 clock edges after the edge that accepts
// sample 15 (1 input register, 1 frame-full flag, 1 core load, 16 output
// memory writes), word k k clocks later.  Frames can follow back-to-back at
// one 16-sample frame every 18 clocks: in_ready is low for 2 cycles after
// each frame, until it has been copied into the core.
module fft_fht16_top
  import fft_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sel_dht,
  input  logic      in_valid,
  input  sample_t   in_data,
  output logic      in_ready,
  output logic      out_valid,
  output addr_t     out_index,
  output out_word_t out_data,
  output logic      busy,
  output logic      ovf
);

  logic            mem_ready, wr_en, frame_done;
  addr_t           wr_addr, rd_addr;
  sample_t         wr_data;
  logic            core_load, core_valid, core_ovf;
  sample_t [N-1:0] core_x, real_part, img_part;
  out_word_t       rd_data;
  logic            done, done_ovf;

  input_block u_input (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (in_valid),
    .in_data    (in_data),
    .in_ready   (in_ready),
    .mem_ready  (mem_ready),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .frame_done (frame_done)
  );

  memory_management u_mem (
    .clk        (clk),
    .rst_n      (rst_n),
    .sel_dht    (sel_dht),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .frame_done (frame_done),
    .mem_ready  (mem_ready),
    .core_load  (core_load),
    .core_x     (core_x),
    .real_part  (real_part),
    .img_part   (img_part),
    .core_ovf   (core_ovf),
    .rd_addr    (rd_addr),
    .rd_data    (rd_data),
    .busy       (busy),
    .done       (done),
    .done_ovf   (done_ovf)
  );

  core_block u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (core_load),
    .x         (core_x),
    .real_part (real_part),
    .img_part  (img_part),
    .valid     (core_valid),
    .ovf       (core_ovf)
  );

  output_block u_out (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (done),
    .rd_addr   (rd_addr),
    .rd_data   (rd_data),
    .out_valid (out_valid),
    .out_index (out_index),
    .out_data  (out_data)
  );

  // Flag held with the words of the frame being output.
  always_ff @(posedge clk) begin
    if (!rst_n)    ovf <= 1'b0;
    else if (done) ovf <= done_ovf;
  end

  // The core's registers are only read after they have been loaded.
  a_core_loaded : assert property (@(posedge clk) disable iff (!rst_n)
                                   done |-> core_valid);

endmodule
