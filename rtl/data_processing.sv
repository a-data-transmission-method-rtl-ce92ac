// data_processing: decides, frame by frame, whether received FEE data is valid, and
// optionally zero-compresses it.
//
// Validity follows the trigger: a trigger pulse is remembered until the next frame starts;
// a frame that starts with a trigger remembered (or arriving in the same clock) is valid
// and consumes it, a frame that starts without one is dropped whole. A valid frame is passed
// on one clock later as ev_start, its words and ev_end/ev_ok (ev_ok copies the FEE checksum
// result). With zero_comp_en set, words equal to zero are removed from the stream.
// The trigger rule and zero compression are named by the paper; dropping all-zero 32-bit
// words (rather than some thresholded or run-length scheme) is this design's choice.
module data_processing (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trigger,
  input  logic        zero_comp_en,
  // from protocol_resolving
  input  logic        frame_start,
  input  logic        word_valid,
  input  logic [31:0] word,
  input  logic        frame_end,
  input  logic        frame_ok,
  // to event_building
  output logic        ev_start,
  output logic        ev_word_valid,
  output logic [31:0] ev_word,
  output logic        ev_end,
  output logic        ev_ok,
  // statistics
  output logic [31:0] frames_accepted,
  output logic [31:0] frames_rejected,
  output logic [31:0] words_suppressed
);
  logic trig_pending;
  logic in_valid_frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_pending     <= 1'b0;
      in_valid_frame   <= 1'b0;
      ev_start         <= 1'b0;
      ev_word_valid    <= 1'b0;
      ev_word          <= '0;
      ev_end           <= 1'b0;
      ev_ok            <= 1'b0;
      frames_accepted  <= '0;
      frames_rejected  <= '0;
      words_suppressed <= '0;
    end else begin
      ev_start      <= 1'b0;
      ev_word_valid <= 1'b0;
      ev_end        <= 1'b0;
      if (frame_start) begin
        trig_pending   <= 1'b0;
        in_valid_frame <= trig_pending | trigger;
        if (trig_pending | trigger) begin
          ev_start        <= 1'b1;
          frames_accepted <= frames_accepted + 1'b1;
        end else begin
          frames_rejected <= frames_rejected + 1'b1;
        end
      end else if (trigger) begin
        trig_pending <= 1'b1;
      end
      if (word_valid && in_valid_frame) begin
        if (zero_comp_en && word == 32'h0) begin
          words_suppressed <= words_suppressed + 1'b1;
        end else begin
          ev_word_valid <= 1'b1;
          ev_word       <= word;
        end
      end
      if (frame_end && in_valid_frame) begin
        ev_end         <= 1'b1;
        ev_ok          <= frame_ok;
        in_valid_frame <= 1'b0;
      end
    end
  end
endmodule
