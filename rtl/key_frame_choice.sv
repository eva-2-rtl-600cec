// key_frame_choice: adaptive key frame selection from the RFBME match error.
//
// While motion estimation runs, the minimum (best-match) difference of every
// receptive field is added into a frame total. When the consumer signals the
// end of the frame, the total is compared with a programmable threshold: a
// frame whose blocks match the key frame poorly (total > threshold) becomes a
// new key frame, otherwise it is predicted. The first frame after reset, and
// any frame with force_key set, is always a key frame because no usable key
// activation exists yet. The paper uses exactly this "block error" metric in
// hardware; the threshold register, force input and the strict ">" are this
// design's choices.
//
// Timing: `decide` is sampled one cycle after the last err_valid at the
// earliest; the decision appears on the next clock edge (dec_valid pulse).
module key_frame_choice
  import eva2_pkg::*;
#(
  parameter int ERR_W   = 24,   // width of one receptive field error
  parameter int TOTAL_W = 36    // width of the frame total
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,      // start of a frame's motion estimation
  input  logic               err_valid,
  input  logic [ERR_W-1:0]   err,
  input  logic               decide,     // all fields of the frame delivered
  input  logic               force_key,
  input  logic [TOTAL_W-1:0] threshold,
  output logic               dec_valid,
  output frame_kind_e        dec_kind,
  output logic [TOTAL_W-1:0] total
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total     <= '0;
      dec_valid <= 1'b0;
      dec_kind  <= FRAME_KEY;
    end else begin
      dec_valid <= 1'b0;
      if (clear) total <= '0;
      else if (err_valid) total <= total + TOTAL_W'(err);
      if (decide) begin
        dec_valid <= 1'b1;
        dec_kind  <= (force_key || total > threshold) ? FRAME_KEY : FRAME_PREDICTED;
      end
    end
  end
endmodule
