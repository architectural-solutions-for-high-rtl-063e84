// tau_merge_unit: stage 3 of the tau trigger for one seed (merging solution
// B). It merges the N_SRC source lists that the seed's filter blocks left in
// their ping-pong buffers into one target list of at most MAX_CAND items.
//
// Registers: Index (one address shared by all source buffers), Count (items
// placed so far) and one Available bit A_i per source. A_i = (Index < S_i).
// Each cycle the first source with A_i = 1 supplies the item at Index, which
// is sent to the target FIFO; A_i is cleared and Count increased. When no A_i
// is left, Index is increased and the A_i are reloaded in that same cycle.
// Merging ends when Count reaches MAX_CAND or no source has an item at the
// new Index; the source buffers are then released (items not taken are just
// overwritten later).
//
// Output stream: first a header beat (seed and totalPt, the sum of the
// N_SRC partial sums), then one beat per item; 'last' marks the final beat.
// Timing: 1 start cycle, 1 header beat, then one item per cycle (at most
// 1 + 1 + MAX_CAND cycles when the FIFO never stalls).
// The Index/Count/Available procedure is the published one; reloading A_i in
// the cycle the last one clears, and the header beat, are this design's.
module tau_merge_unit
  import tau_pkg::*;
#(
  parameter int unsigned N_SRC    = N_FILT,
  parameter int unsigned DEPTH    = FILT_LEN,
  parameter int unsigned MAX      = MAX_CAND,
  localparam int unsigned SW      = $clog2(DEPTH+1),
  localparam int unsigned SIDE_W  = $bits(particle_t) + SUMPT_W
) (
  input  logic                 clk,
  input  logic                 rst,
  // source buffers
  input  logic                 src_valid [N_SRC],
  input  logic [SW-1:0]        src_size  [N_SRC],
  input  logic [SIDE_W-1:0]    src_side  [N_SRC],
  output logic [$clog2(DEPTH)-1:0] src_addr,
  input  particle_t            src_data  [N_SRC],
  output logic                 src_release,
  // target stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output cand_beat_t           out_beat
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_RUN} state_e;
  state_e state;
  logic [SW-1:0] index;
  logic [$clog2(MAX+1)-1:0] count;
  logic [N_SRC-1:0] avail, avail_rest, avail_next, sel_oh;
  logic [$clog2(N_SRC)-1:0] sel;
  logic all_valid, last;
  logic [SUMPT_W-1:0] total_pt;

  always_comb begin
    all_valid = 1'b1;
    total_pt  = '0;
    for (int i = 0; i < N_SRC; i++) begin
      all_valid = all_valid && src_valid[i];
      total_pt  = total_pt + src_side[i][SUMPT_W-1:0];
    end
    // first available source
    sel    = '0;
    sel_oh = '0;
    for (int i = N_SRC - 1; i >= 0; i--)
      if (avail[i]) begin
        sel    = i[$clog2(N_SRC)-1:0];
        sel_oh = N_SRC'(1) << i;
      end
    avail_rest = avail & ~sel_oh;
    for (int i = 0; i < N_SRC; i++)
      avail_next[i] = (index + 1'b1) < src_size[i];
  end

  always_comb begin
    out_beat = '0;
    last     = 1'b0;
    if (state == S_HDR) begin
      out_beat.hdr      = 1'b1;
      out_beat.p        = particle_t'(src_side[0][SIDE_W-1:SUMPT_W]);
      out_beat.total_pt = total_pt;
      last              = (avail == '0);
    end else begin
      out_beat.p = src_data[sel];
      last       = (32'(count) + 1 == MAX) || (avail_rest == '0 && avail_next == '0);
    end
    out_beat.last = last;
  end

  assign out_valid   = (state == S_HDR) || (state == S_RUN);
  assign src_addr    = index[$clog2(DEPTH)-1:0];
  assign src_release = out_valid && out_ready && last;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      index <= '0;
      count <= '0;
      avail <= '0;
    end else begin
      case (state)
        S_IDLE: if (all_valid) begin
          index <= '0;
          count <= '0;
          for (int i = 0; i < N_SRC; i++) avail[i] <= (src_size[i] != '0);
          state <= S_HDR;
        end
        S_HDR: if (out_ready) state <= last ? S_IDLE : S_RUN;
        default: if (out_ready) begin
          count <= count + 1'b1;
          if (last) state <= S_IDLE;
          else if (avail_rest == '0) begin
            index <= index + 1'b1;
            avail <= avail_next;
          end else begin
            avail <= avail_rest;
          end
        end
      endcase
    end
  end

  // An item is only ever taken from a source whose Available bit is set.
  assert property (@(posedge clk) disable iff (rst)
                   (state == S_RUN) |-> (avail != '0))
    else $error("tau_merge_unit: running with no available source");
  assert property (@(posedge clk) disable iff (rst)
                   (state == S_RUN) |-> (32'(count) < MAX))
    else $error("tau_merge_unit: target list overflow");
endmodule
