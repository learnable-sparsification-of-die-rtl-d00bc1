// emio_serializer: transmit half of the EMIO die-to-die SerDes.
//
// It takes one 38-bit link word (3-bit core index + 35-bit packet) from the
// merge block and shifts it out over the link, SER_W bits per cycle, least
// significant bits first, with req held high for the whole frame. After the
// last beat it drops req and waits for the receiver's ack pulse before it
// takes the next word, so the receiver can never be overrun. The paper gives
// REQ, ACK and DATA signals, a 38-bit word and a serialization stage of 38
// cycles, which makes the default SER_W = 1 bit per cycle; its figure labels
// the DATA line 38, read here as the word width. The frame format and the
// handshake order are this design's choice.
// Timing: a word accepted at edge 0 is on the link during cycles 1 .. 38
// (LINK_W / SER_W beats); the next word can be accepted the cycle after ack.
module emio_serializer
  import hnn_pkg::*;
#(
  parameter int unsigned SER_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  link_word_t       in_word,
  input  logic             in_valid,
  output logic             in_ready,
  // die-to-die link
  output logic             link_req,
  output logic [SER_W-1:0] link_data,
  input  logic             link_ack
);
  localparam int unsigned BEATS = (LINK_W + SER_W - 1) / SER_W;
  localparam int unsigned SW    = BEATS * SER_W;
  localparam int unsigned CW    = $clog2(BEATS + 1);

  typedef enum logic [1:0] {T_IDLE, T_SEND, T_WAIT} tx_state_e;
  tx_state_e      state;
  logic [SW-1:0]  shreg;
  logic [CW-1:0]  beat;

  assign in_ready  = (state == T_IDLE);
  assign link_req  = (state == T_SEND);
  assign link_data = shreg[SER_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; shreg <= '0; beat <= '0;
    end else begin
      case (state)
        T_IDLE: if (in_valid) begin
          shreg <= SW'(in_word);
          beat  <= '0;
          state <= T_SEND;
        end
        T_SEND: begin
          shreg <= shreg >> SER_W;
          beat  <= beat + 1'b1;
          if (beat == CW'(BEATS-1)) state <= T_WAIT;
        end
        T_WAIT: if (link_ack) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
