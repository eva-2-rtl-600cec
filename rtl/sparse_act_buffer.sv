// sparse_act_buffer: the sparse key frame activation buffer.
//
// Holds the target-layer activation of the latest key frame in run-length
// encoded form (entries {gap, value, last}, see eva2_pkg). The layer
// accelerators return the activation as a stream of such entries, spatial
// positions in raster order and, within a position, channels in increasing
// order. Storage is split into four banks by the parity of the position,
// bank = {x[0], y[0]}, so the 2x2 neighbourhood read by the warp engine
// always touches four different banks and the four decoder lanes can fetch
// in parallel. Each bank has an entry memory, filled contiguously, and an
// index memory giving {start, count} for each of its positions.
//
// The stand-in entry {0, 0, last} of a position without non-zero channels is
// not stored: the position gets count 0 and the reader treats it as empty.
//
// If a bank fills up, further entries of that bank are dropped, `overflow`
// is set until the next wr_start, and the position keeps only the entries
// that fit (the reader ends the list at `count`, not at the `last` flag).
//
// The paper gives the buffer's function and its run-length encoding; the
// banking, index table and overflow policy are this design's choices. The
// paper builds this store in eDRAM; here it is synthesizable arrays.
//
// Timing: one entry written per cycle (wr_ready is always 1); reads are
// synchronous with one cycle of latency on every port.
module sparse_act_buffer
  import eva2_pkg::*;
#(
  parameter int ACT_WD           = FRAME_W_D / TILE_D,
  parameter int ACT_HT           = FRAME_H_D / TILE_D,
  parameter int ENTRIES_PER_BANK = ENTRIES_PER_BANK_D,
  parameter int CHANNELS         = CHANNELS_D,
  localparam int HW  = (ACT_WD + 1) / 2,
  localparam int HH  = (ACT_HT + 1) / 2,
  localparam int PA_W = $clog2(HW * HH),
  localparam int EA_W = $clog2(ENTRIES_PER_BANK),
  localparam int CNT_W = $clog2(CHANNELS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write side (from the layer accelerators)
  input  logic             wr_start,
  input  logic             wr_valid,
  input  rle_entry_t       wr_entry,
  output logic             wr_ready,
  output logic             wr_done,     // pulse: last position stored
  output logic             overflow,
  // read side, one port per bank
  input  logic [PA_W-1:0]  idx_raddr [4],
  output logic [EA_W-1:0]  idx_start [4],
  output logic [CNT_W-1:0] idx_count [4],
  input  logic [EA_W-1:0]  ent_raddr [4],
  output rle_entry_t       ent_rdata [4]
);
  typedef struct packed {
    logic [EA_W-1:0]  start;
    logic [CNT_W-1:0] count;
  } idx_t;

  rle_entry_t ent_mem [4][ENTRIES_PER_BANK];
  idx_t       idx_mem [4][HW*HH];

  logic [$clog2(ACT_WD)-1:0] wx;
  logic [$clog2(ACT_HT)-1:0] wy;
  logic [EA_W:0]             wptr [4];
  logic [EA_W:0]             pos_start;
  logic [CNT_W-1:0]          pos_count;
  logic [1:0]                wbank;
  logic [PA_W-1:0]           wpos;
  logic                      room;
  logic                      store;       // entry goes into the entry memory
  logic                      placeholder;

  assign wbank    = {wx[0], wy[0]};
  assign wpos     = PA_W'(int'(wy >> 1) * HW + int'(wx >> 1));
  assign room     = (wptr[wbank] < (EA_W+1)'(ENTRIES_PER_BANK));
  assign placeholder = wr_entry.last && (wr_entry.gap == '0) && (wr_entry.value == '0) &&
                       (pos_count == '0);
  assign store    = wr_valid && room && !placeholder;
  assign wr_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (store) ent_mem[wbank][wptr[wbank][EA_W-1:0]] <= wr_entry;
    if (wr_valid && wr_entry.last)
      idx_mem[wbank][wpos] <= '{start: pos_start[EA_W-1:0],
                                count: pos_count + (store ? 1'b1 : 1'b0)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wx <= '0; wy <= '0;
      for (int b = 0; b < 4; b++) wptr[b] <= '0;
      pos_start <= '0; pos_count <= '0;
      overflow <= 1'b0; wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      if (wr_start) begin
        wx <= '0; wy <= '0;
        for (int b = 0; b < 4; b++) wptr[b] <= '0;
        pos_start <= '0; pos_count <= '0;
        overflow <= 1'b0;
      end else if (wr_valid) begin
        if (store) wptr[wbank] <= wptr[wbank] + 1'b1;
        else if (!placeholder) overflow <= 1'b1;
        if (wr_entry.last) begin
          pos_count <= '0;
          // start of the next position: its bank's write pointer
          if (int'(wx) < ACT_WD - 1) begin
            wx <= wx + 1'b1;
            pos_start <= wptr[{~wx[0], wy[0]}];   // always another bank
          end else begin
            wx <= '0;
            if (int'(wy) < ACT_HT - 1) wy <= wy + 1'b1;
            else begin
              wy <= '0;
              wr_done <= 1'b1;
            end
            pos_start <= wptr[{1'b0, ~wy[0]}];
          end
        end else if (store) begin
          pos_count <= pos_count + 1'b1;
        end
      end
    end
  end

  // read ports
  always_ff @(posedge clk) begin
    for (int b = 0; b < 4; b++) begin
      idx_start[b] <= idx_mem[b][idx_raddr[b]].start;
      idx_count[b] <= idx_mem[b][idx_raddr[b]].count;
      ent_rdata[b] <= ent_mem[b][ent_raddr[b]];
    end
  end
endmodule
