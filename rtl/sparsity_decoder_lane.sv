// sparsity_decoder_lane (SDL): walks the run-length encoded channel list of
// one of the four activation positions that a warped output interpolates.
//
// Entries {gap, value, last} are pushed into a small FIFO by the warp
// engine's fetcher. The lane holds the current entry in its `zero_gap` and
// `value` registers and reports zero_gap to the min unit (all ones once the
// lane is inactive: never started, out of the activation, or past its last
// entry). On each `step` the warp engine broadcasts the minimum gap m:
//   * zero_gap == m: the lane's value belongs to the current output channel;
//     it is driven to the interpolator and the next entry is dequeued
//     (`deq`), or the lane deactivates if the entry was the last one;
//   * otherwise the lane outputs 0 and zero_gap becomes zero_gap - m - 1.
// This is the datapath of the paper's SDL figure (FIFO, value and zero_gap
// registers, "-min", "-1", zero compare, max_zero on deactivation). The FIFO
// depth and the ready/last handshake are this design's choices.
//
// Interface timing: `ready` is high when the lane can take part in a step
// (current entry loaded, or inactive). `value_out`/`hit` are combinational
// from the registers and the broadcast minimum.
module sparsity_decoder_lane
  import eva2_pkg::*;
#(
  parameter int FIFO_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               activate,     // start a new position (clears the FIFO)
  input  logic               act_en,       // ... with entries to decode (else stay inactive)
  input  logic               push,
  input  rle_entry_t         push_entry,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count,
  input  logic               step,
  input  logic [GAP_W-1:0]   gap_min,
  output logic [GAP_W-1:0]   gap_out,      // to the min unit
  output logic               ready,
  output logic               active,
  output logic               hit,          // zero_gap == gap_min: value used this step
  output logic               cur_last,     // current entry is the position's last
  output logic signed [ACT_W-1:0] value_out
);
  localparam logic [GAP_W-1:0] MAX_ZERO = '1;
  localparam int PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  rle_entry_t fifo [FIFO_DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(FIFO_DEPTH+1)-1:0] count;

  logic [GAP_W-1:0]        zero_gap;
  logic signed [ACT_W-1:0] value;
  logic                    cur_valid, last_q;

  logic       pop;
  rle_entry_t head;
  assign head = fifo[rd_ptr];

  assign ready     = !active || cur_valid;
  assign gap_out   = (active && cur_valid) ? zero_gap : MAX_ZERO;
  assign hit       = active && cur_valid && (zero_gap == gap_min);
  assign value_out = hit ? value : '0;
  assign cur_last  = last_q;
  assign fifo_count = count;

  // load a new current entry when there is none, or when the current one is
  // consumed by this step and more entries follow
  assign pop = active && (count != 0) &&
               (!cur_valid || (step && hit && !last_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      zero_gap <= MAX_ZERO; value <= '0; cur_valid <= 1'b0; last_q <= 1'b0;
      active <= 1'b0;
    end else if (activate) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      cur_valid <= 1'b0; last_q <= 1'b0; zero_gap <= MAX_ZERO;
      active <= act_en;
    end else begin
      if (push) begin
        fifo[wr_ptr] <= push_entry;
        wr_ptr <= (int'(wr_ptr) == FIFO_DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (int'(rd_ptr) == FIFO_DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);

      if (pop) begin
        zero_gap  <= head.gap;
        value     <= head.value;
        last_q    <= head.last;
        cur_valid <= 1'b1;
      end else if (step && active && cur_valid) begin
        if (hit) begin
          cur_valid <= 1'b0;
          if (last_q) begin
            active   <= 1'b0;
            zero_gap <= MAX_ZERO;
          end
        end else begin
          zero_gap <= zero_gap - gap_min - 1'b1;
        end
      end
    end
  end

  // rules of the handshake
  always @(posedge clk) begin
    if (rst_n && !activate) begin
      assert (!(push && count == FIFO_DEPTH && !pop)) else $error("SDL FIFO overflow");
      assert (!(step && !ready)) else $error("SDL stepped while not ready");
    end
  end
endmodule
