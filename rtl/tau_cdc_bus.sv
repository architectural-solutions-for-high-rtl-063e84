// tau_cdc_bus: carries a W-bit word between two unrelated clocks with a
// toggle request/acknowledge handshake.
//
// Source side: a word offered with src_valid while src_ready is high is
// captured into a holding register and the request toggle flips. The
// destination sees the toggle through a two-flop synchronizer, presents the
// held word with dst_valid until dst_ready, then flips its acknowledge
// toggle, which returns through another two-flop synchronizer and frees the
// source. The holding register is stable for the whole time the destination
// may sample it, so the wide word itself needs no synchronizer.
//
// Latency about 3 destination cycles for the data and about 3 more source
// cycles until the source can take the next word. Used to cross from the
// 360 MHz link clock to the 300 MHz algorithm clock and back; the need for
// this crossing is from the published design, the handshake scheme is this
// design's choice.
module tau_cdc_bus #(
  parameter int unsigned W = 64
) (
  input  logic         src_clk,
  input  logic         src_rst,
  input  logic         src_valid,
  output logic         src_ready,
  input  logic [W-1:0] src_data,
  input  logic         dst_clk,
  input  logic         dst_rst,
  output logic         dst_valid,
  input  logic         dst_ready,
  output logic [W-1:0] dst_data
);
  logic [W-1:0] hold;
  logic req_t, ack_t;
  logic [1:0] ack_sync;   // ack toggle in the source clock
  logic [1:0] req_sync;   // req toggle in the destination clock
  logic req_seen;

  // source clock
  assign src_ready = (ack_sync[1] == req_t);
  always_ff @(posedge src_clk) begin
    if (src_rst) begin
      req_t    <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_t};
      if (src_valid && src_ready) begin
        hold  <= src_data;
        req_t <= !req_t;
      end
    end
  end

  // destination clock
  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      req_sync  <= '0;
      req_seen  <= 1'b0;
      ack_t     <= 1'b0;
      dst_valid <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], req_t};
      if (!dst_valid && req_sync[1] != req_seen) begin
        dst_valid <= 1'b1;
        dst_data  <= hold;
        req_seen  <= req_sync[1];
      end else if (dst_valid && dst_ready) begin
        dst_valid <= 1'b0;
        ack_t     <= req_seen;
      end
    end
  end
endmodule
