// emio_merge: the 8-to-1 merge block of one EMIO side.
//
// PORTS edge cores of one chip side send packets toward the neighbouring
// chip. Each input has a FIFO; a round-robin arbiter picks one non-empty FIFO
// at a time and forwards its head packet, concatenated with the 3-bit index
// of the core it came from, as one 38-bit link word. The 8-to-1 merge, the
// 3-bit core index and the 35+3 = 38-bit concatenation follow the EMIO figure.
// The paper calls the merge buffers asynchronous FIFOs but also runs the whole
// boundary on one 200 MHz clock; with one clock this design uses synchronous
// FIFOs. Round-robin arbitration is this design's choice.
// Timing: one link word per cycle at most when out_ready stays high.
module emio_merge
  import hnn_pkg::*;
#(
  parameter int unsigned PORTS      = 8,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  packet_t    in_pkt   [PORTS],
  input  logic       in_valid [PORTS],
  output logic       in_ready [PORTS],
  output link_word_t out_word,
  output logic       out_valid,
  input  logic       out_ready
);
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1;
  packet_t       head   [PORTS];
  logic          head_v [PORTS];
  logic          pop    [PORTS];
  logic [PW-1:0] last, sel;
  logic          any;

  for (genvar i = 0; i < PORTS; i++) begin : g_fifo
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .wr_data(in_pkt[i]), .wr_valid(in_valid[i]), .wr_ready(in_ready[i]),
      .rd_data(head[i]), .rd_valid(head_v[i]), .rd_ready(pop[i]));
  end

  always_comb begin
    any = 1'b0; sel = '0;
    for (int k = 1; k <= PORTS; k++) begin
      int c;
      c = (int'(last) + k) % PORTS;
      if (!any && head_v[c]) begin any = 1'b1; sel = PW'(c); end
    end
    for (int i = 0; i < PORTS; i++) pop[i] = any && out_ready && (sel == PW'(i));
  end

  assign out_valid    = any;
  assign out_word.tag = TAG_W'(sel);
  assign out_word.pkt = head[sel];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                      last <= PW'(PORTS-1);
    else if (out_valid && out_ready) last <= sel;
endmodule
