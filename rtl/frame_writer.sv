// Frame writer: stores the camera's frames in external memory.
//
// Pixels arrive as a valid/ready stream of 16-bit words; px_sof marks the
// first word of a frame. Frames are written alternately into two slots,
// slot s starting at frame_base + s*frame_words, so that the accelerator can
// process the last complete frame while the next one is written. Each
// accepted word becomes one memory write. When a frame's frame_words words
// are written, frame_done pulses, done_slot tells which slot now holds a
// complete frame and frame_count increments. A px_sof word always starts a
// new frame at the beginning of the next slot; words beyond frame_words are
// dropped.
// Storing incoming frames in memory follows the design; the two slots, the
// stream handshake and the fixed word count are this design's choices.
module frame_writer
  import ssd_accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  addr_t       frame_base,
  input  logic [31:0] frame_words,
  // pixel stream
  input  logic        px_valid,
  input  logic        px_sof,
  input  data_t       px_data,
  output logic        px_ready,
  // memory master
  output mem_req_t    req,
  input  logic        req_ready,
  // status
  output logic        frame_done,
  output logic        done_slot,
  output logic [31:0] frame_count
);

  logic        slot_q, active_q;
  logic [31:0] idx_q;
  logic        start_new;
  logic        cur_slot;
  logic [31:0] cur_idx;

  // A start-of-frame word opens the slot after the last one used.
  assign start_new = px_sof;
  assign cur_slot  = start_new ? ~slot_q : slot_q;
  assign cur_idx   = start_new ? '0 : idx_q;

  logic writing;
  assign writing = px_valid && (start_new || (active_q && idx_q < frame_words));

  assign req.valid = writing;
  assign req.we    = 1'b1;
  assign req.addr  = frame_base + (cur_slot ? frame_words : '0) + cur_idx;
  assign req.wdata = px_data;

  // Words that are not written are dropped at once.
  assign px_ready  = writing ? req_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q      <= 1'b1;
      active_q    <= 1'b0;
      idx_q       <= '0;
      frame_done  <= 1'b0;
      done_slot   <= 1'b0;
      frame_count <= '0;
    end else begin
      frame_done <= 1'b0;
      if (writing && req_ready) begin
        slot_q   <= cur_slot;
        idx_q    <= cur_idx + 1;
        active_q <= 1'b1;
        if (cur_idx + 1 == frame_words) begin
          frame_done  <= 1'b1;
          done_slot   <= cur_slot;
          frame_count <= frame_count + 1;
          active_q    <= 1'b0;
        end
      end
    end
  end

endmodule
