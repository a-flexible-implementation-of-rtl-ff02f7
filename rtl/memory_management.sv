// memory_management: storage and sequencing of the engine.
//
// How it works.  The block holds two memories, both register arrays: the
// input memory (16 x 16-bit samples) and the output memory (16 x 32-bit
// words, called mem_said with address mem_end in the design's simulation
// traces).  The input block writes samples into the input memory; its
// frame_done marks the frame as full and drops mem_ready (from the cycle of
// the last write, so that no sample of the next frame is accepted before the
// current one has been copied).  A small controller
// then:
//   IDLE   when a full frame is waiting, raises core_load for one cycle, which
//          copies the transform of the whole input memory into the core's
//          Real Part / Img Part registers, samples the DFT/DHT selector, and
//          frees the input memory (mem_ready rises again);
//   WRITE  for 16 cycles writes output word k = 0..15: for the DFT
//          {Re V_k, Im V_k}, for the DHT {16'b0, H_k} with
//          H_k = Re V_k - Im V_k (saturated to 16 bits);
// and pulses done after the last word.  The output memory is read
// combinationally on rd_addr.
//
// Timing: core_load one cycle after frame_done; the first output word is
// written one cycle after core_load; done is high in the cycle after word 15
// is written, 17 cycles after core_load.  A new frame may be loaded while the
// previous one is being written.
//
// The two memories, the DFT/DHT selection inside this block, H = Re - Im and
// the word layout follow the paper; the controller, the write order and the
// selector polarity (1 = DHT) are this design's choices.
module memory_management
  import fft_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sel_dht,     // DFT/DHT selector: 1 = DHT
  // from the input block
  input  logic            wr_en,
  input  addr_t           wr_addr,
  input  sample_t         wr_data,
  input  logic            frame_done,
  output logic            mem_ready,
  // to / from the core block
  output logic            core_load,
  output sample_t [N-1:0] core_x,
  input  sample_t [N-1:0] real_part,
  input  sample_t [N-1:0] img_part,
  input  logic            core_ovf,
  // output memory read port
  input  addr_t           rd_addr,
  output out_word_t       rd_data,
  // status
  output logic            busy,
  output logic            done,
  output logic            done_ovf
);

  typedef enum logic {S_IDLE, S_WRITE} state_e;

  sample_t [N-1:0] in_mem;
  out_word_t       out_mem [N];
  logic            frame_full;
  state_e          state;
  addr_t           waddr;
  mode_e           mode;
  logic            ovf_acc;
  sample_t         re_w, im_w, h_w;
  logic            h_clip;

  assign core_x    = in_mem;
  assign mem_ready = !frame_full && !frame_done;
  assign core_load = (state == S_IDLE) && frame_full;
  assign busy      = (state == S_WRITE) || frame_full;
  assign rd_data   = out_mem[rd_addr];

  // Selected transform for the word being written.
  always_comb begin
    re_w   = real_part[waddr];
    im_w   = img_part[waddr];
    h_w    = sat16(wide_t'(re_w) - wide_t'(im_w));
    h_clip = (wide_t'(h_w) != (wide_t'(re_w) - wide_t'(im_w)));
  end

  // Input memory.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_mem <= '0;
    end else if (wr_en) begin
      in_mem[wr_addr] <= wr_data;
    end
  end

  // Output memory.
  always_ff @(posedge clk) begin
    if (state == S_WRITE) begin
      out_mem[waddr] <= pack_word(mode, re_w, im_w, h_w);
    end
  end

  // Controller.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      frame_full <= 1'b0;
      state      <= S_IDLE;
      waddr      <= '0;
      mode       <= MODE_DFT;
      ovf_acc    <= 1'b0;
      done       <= 1'b0;
      done_ovf   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (frame_done)     frame_full <= 1'b1;
      else if (core_load) frame_full <= 1'b0;
      case (state)
        S_IDLE: begin
          if (core_load) begin
            state <= S_WRITE;
            waddr <= '0;
            mode  <= mode_e'(sel_dht);
          end
        end
        S_WRITE: begin
          ovf_acc <= (waddr == '0) ? (core_ovf || (mode == MODE_DHT && h_clip))
                                   : (ovf_acc || (mode == MODE_DHT && h_clip));
          waddr   <= waddr + 1'b1;
          if (waddr == addr_t'(N - 1)) begin
            state    <= S_IDLE;
            done     <= 1'b1;
            done_ovf <= ovf_acc || (mode == MODE_DHT && h_clip);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // frame_done comes with the write of the last sample, and the input block
  // only writes while mem_ready is high.
  a_no_overwrite : assert property (@(posedge clk) disable iff (!rst_n)
                                    wr_en |-> !frame_full);

endmodule
