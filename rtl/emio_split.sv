// emio_split: the 1-to-8 split block of one EMIO side.
//
// A 38-bit link word from the deserializer is split into its 3-bit core index
// and the 35-bit packet, and the packet is queued in the FIFO of the edge core
// named by the index, which hands it to that core's router. Receiver core k
// is the core at the same position along the side as sender core k of the
// neighbouring chip. The split into 3 + 35 bits and the 1-to-8 fan-out follow
// the EMIO figure; synchronous FIFOs (the paper's figure says asynchronous,
// its text one 200 MHz clock) are this design's choice.
// Timing: in_ready is the addressed FIFO's not-full, so the word is taken in
// the cycle it is offered unless that FIFO is full.
module emio_split
  import hnn_pkg::*;
#(
  parameter int unsigned PORTS      = 8,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  link_word_t in_word,
  input  logic       in_valid,
  output logic       in_ready,
  output packet_t    out_pkt   [PORTS],
  output logic       out_valid [PORTS],
  input  logic       out_ready [PORTS]
);
  logic wr_ready [PORTS];
  logic wr_valid [PORTS];

  always_comb begin
    in_ready = 1'b0;
    for (int i = 0; i < PORTS; i++) begin
      wr_valid[i] = in_valid && (int'(in_word.tag) == i);
      if (int'(in_word.tag) == i) in_ready = wr_ready[i];
    end
  end

  for (genvar i = 0; i < PORTS; i++) begin : g_fifo
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .wr_data(in_word.pkt), .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]),
      .rd_data(out_pkt[i]), .rd_valid(out_valid[i]), .rd_ready(out_ready[i]));
  end
endmodule
