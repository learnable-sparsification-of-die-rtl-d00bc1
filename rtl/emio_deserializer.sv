// emio_deserializer: receive half of the EMIO die-to-die SerDes.
//
// While link_req is high it shifts in SER_W bits per cycle, least significant
// first; after LINK_W / SER_W beats the 38-bit link word is complete and is
// offered to the split block. When the split block takes it, the
// deserializer pulses link_ack for one cycle, which lets the serializer start
// the next frame. The protocol matches emio_serializer; it is this design's
// reading of the REQ/ACK/DATA link of the paper's EMIO figure.
// Timing: the word is offered the cycle after its last beat; ack follows in
// the cycle after it is taken.
module emio_deserializer
  import hnn_pkg::*;
#(
  parameter int unsigned SER_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             link_req,
  input  logic [SER_W-1:0] link_data,
  output logic             link_ack,
  output link_word_t       out_word,
  output logic             out_valid,
  input  logic             out_ready
);
  localparam int unsigned BEATS = (LINK_W + SER_W - 1) / SER_W;
  localparam int unsigned SW    = BEATS * SER_W;
  localparam int unsigned CW    = $clog2(BEATS + 1);

  logic [SW-1:0] shreg;
  logic [CW-1:0] beat;
  logic          full;

  assign out_valid = full;
  assign out_word  = link_word_t'(shreg[LINK_W-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0; beat <= '0; full <= 1'b0; link_ack <= 1'b0;
    end else begin
      link_ack <= 1'b0;
      if (full) begin
        if (out_ready) begin full <= 1'b0; link_ack <= 1'b1; end
      end else if (link_req) begin
        shreg <= {link_data, shreg[SW-1:SER_W]};
        if (beat == CW'(BEATS-1)) begin beat <= '0; full <= 1'b1; end
        else                           beat <= beat + 1'b1;
      end
    end
  end
endmodule
