// emio: Extended-Mux I/O, the die-to-die interface of one chip side.
//
// Outbound, the PORTS edge cores of the side feed the 8-to-1 merge block,
// which tags each packet with its core index (38-bit link word), and the
// serializer sends the word over the side's output link. Inbound, the
// deserializer rebuilds link words from the side's input link and the 1-to-8
// split block hands each packet to the edge core named by its tag. Each side
// thus has two unidirectional links, so a chip has 8 at its pads where its
// edge has 64 unidirectional core ports (32 in, 32 out). The structure is the
// one of the paper's EMIO figure and text; the FIFOs, arbitration and link
// handshake are this design's (see the sub-blocks).
// Timing: a packet crosses from a core of one chip to the matching core of
// the next in about 45 cycles with SER_W = 1 when the link is idle: FIFO and
// merge, 38 serial beats, split FIFO.
module emio
  import hnn_pkg::*;
#(
  parameter int unsigned PORTS      = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned SER_W      = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the side's edge cores (outbound)
  input  packet_t          core_in_pkt   [PORTS],
  input  logic             core_in_valid [PORTS],
  output logic             core_in_ready [PORTS],
  // to the side's edge cores (inbound)
  output packet_t          core_out_pkt  [PORTS],
  output logic             core_out_valid[PORTS],
  input  logic             core_out_ready[PORTS],
  // outbound link
  output logic             tx_req,
  output logic [SER_W-1:0] tx_data,
  input  logic             tx_ack,
  // inbound link
  input  logic             rx_req,
  input  logic [SER_W-1:0] rx_data,
  output logic             rx_ack
);
  link_word_t m_word, d_word;
  logic       m_valid, m_ready, d_valid, d_ready;

  emio_merge #(.PORTS(PORTS), .FIFO_DEPTH(FIFO_DEPTH)) u_merge (
    .clk, .rst_n, .in_pkt(core_in_pkt), .in_valid(core_in_valid), .in_ready(core_in_ready),
    .out_word(m_word), .out_valid(m_valid), .out_ready(m_ready));

  emio_serializer #(.SER_W(SER_W)) u_ser (
    .clk, .rst_n, .in_word(m_word), .in_valid(m_valid), .in_ready(m_ready),
    .link_req(tx_req), .link_data(tx_data), .link_ack(tx_ack));

  emio_deserializer #(.SER_W(SER_W)) u_des (
    .clk, .rst_n, .link_req(rx_req), .link_data(rx_data), .link_ack(rx_ack),
    .out_word(d_word), .out_valid(d_valid), .out_ready(d_ready));

  emio_split #(.PORTS(PORTS), .FIFO_DEPTH(FIFO_DEPTH)) u_split (
    .clk, .rst_n, .in_word(d_word), .in_valid(d_valid), .in_ready(d_ready),
    .out_pkt(core_out_pkt), .out_valid(core_out_valid), .out_ready(core_out_ready));
endmodule
