// tau_pipo: ping-pong (double) buffer holding one source list of the merging
// stage, with its Size register S.
//
// Two banks of DEPTH items. The producer appends items to the write bank
// (wr_en) and closes it with commit, which also stores the bank's size and a
// side word (here the seed and the partial totalPt). The closed bank becomes
// readable: rd_valid, rd_size and rd_side describe it and rd_data is the item
// at rd_addr, read combinationally (random access, unlike a FIFO). release
// frees the read bank; items left unread are simply overwritten later, so no
// leftovers have to be drained. wr_ready is low while both banks are full.
//
// Random-access ping-pong source lists with a size register follow the
// published merging solution B; the commit/release handshake is this
// design's choice.
module tau_pipo #(
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned W      = 64,
  parameter int unsigned SIDE_W = 88
) (
  input  logic                       clk,
  input  logic                       rst,
  // write side
  output logic                       wr_ready,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       commit,
  input  logic [SIDE_W-1:0]          commit_side,
  // read side
  output logic                       rd_valid,
  output logic [$clog2(DEPTH+1)-1:0] rd_size,
  output logic [SIDE_W-1:0]          rd_side,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic [W-1:0]               rd_data,
  input  logic                       release_bank
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned SW = $clog2(DEPTH+1);

  logic [W-1:0]      mem [2][DEPTH];
  logic [SW-1:0]     size [2];
  logic [SIDE_W-1:0] side [2];
  logic [1:0]        full;
  logic              wbank, rbank;
  logic [SW-1:0]     wptr;

  assign wr_ready = !full[wbank];
  assign rd_valid = full[rbank];
  assign rd_size  = size[rbank];
  assign rd_side  = side[rbank];
  assign rd_data  = mem[rbank][rd_addr];

  always_ff @(posedge clk) begin
    if (rst) begin
      full  <= '0;
      wbank <= 1'b0;
      rbank <= 1'b0;
      wptr  <= '0;
    end else begin
      if (wr_en && wr_ready && wptr < SW'(DEPTH)) begin
        mem[wbank][wptr[AW-1:0]] <= wr_data;
        wptr <= wptr + 1'b1;
      end
      if (commit && wr_ready) begin
        size[wbank]  <= (wr_en && wptr < SW'(DEPTH)) ? wptr + 1'b1 : wptr;
        side[wbank]  <= commit_side;
        full[wbank]  <= 1'b1;
        wbank        <= !wbank;
        wptr         <= '0;
      end
      if (release_bank && full[rbank]) begin
        full[rbank] <= 1'b0;
        rbank       <= !rbank;
      end
    end
  end

  // A commit to the bank being released in the same cycle cannot happen:
  // the write bank is never the full read bank.
  assert property (@(posedge clk) disable iff (rst) commit |-> wr_ready)
    else $error("tau_pipo: commit while both banks are full");
  assert property (@(posedge clk) disable iff (rst) wr_en |-> wr_ready)
    else $error("tau_pipo: write while both banks are full");
endmodule
