// core_block: the arithmetic block of the engine, a DFT computer followed by
// the Real Part and Img Part registers.
//
// How it works.  The combinational dft_computer transforms the 16-sample
// frame x.  When load is high at a clock edge, its 16 real and 16 imaginary
// outputs (signed Q8.7, 16 bits each) are captured in the Real Part and Img
// Part registers, and the saturation flag with them.  valid rises at that same
// edge and stays high until the next reset; the parts hold their value until
// the next load.
//
// Timing: result visible one clock after the load edge is sampled (latency
// 1 cycle); a new frame can be loaded every cycle.
//
// The split into DFT computer, Real Part and Img Part is the design's own
// block diagram; making the two parts clocked registers is this design's
// choice.
module core_block
  import fft_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  sample_t [N-1:0] x,
  output sample_t [N-1:0] real_part,
  output sample_t [N-1:0] img_part,
  output logic            valid,
  output logic            ovf
);

  sample_t [N-1:0] dft_re, dft_im;
  logic            dft_ovf;

  dft_computer u_dft (
    .x   (x),
    .re  (dft_re),
    .im  (dft_im),
    .ovf (dft_ovf)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      real_part <= '0;
      img_part  <= '0;
      valid     <= 1'b0;
      ovf       <= 1'b0;
    end else if (load) begin
      real_part <= dft_re;
      img_part  <= dft_im;
      valid     <= 1'b1;
      ovf       <= dft_ovf;
    end
  end

endmodule
