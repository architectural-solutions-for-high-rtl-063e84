// tau_fifo: synchronous first-in first-out buffer with valid/ready on both
// sides. Used as the channel between dataflow stages and as the per-seed
// target candidate list that the merging stage fills.
//
// DEPTH entries of W bits, register array storage. in_ready = not full,
// out_valid = not empty; out_data is the head entry, shown combinationally.
// A write and a read may happen in the same cycle. Latency: an entry written
// in one cycle is readable in the next. Depth and interface are this
// design's choice; the use of FIFOs between stages and for the target list
// is from the published design.
module tau_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   cnt;
  logic push, pop;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (push) begin
        mem[wptr] <= in_data;
        wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      end
      if (pop) rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (rst) cnt <= (AW+1)'(DEPTH))
    else $error("tau_fifo: occupancy above depth");
endmodule
