// clp_a2s: cross-layer packet converter of a spiking core, activation to spike.
//
// The 17-bit local word from the router is split into its type bit (the
// "Type Sel" of the converter) and a 16-bit {axon, payload} word. A spike
// packet passes straight to the input mux. An activation packet is added to
// the 8-bit input potential V_i that the core SRAM keeps for the addressed
// axon: the converter reads V_i, forms V_i + a_i (saturated at 255 - the paper
// does not say what happens on overflow) and passes {axon, V_i + a_i} on, with
// its type, to the core controller, which writes the sum back and schedules
// the rate-coded spike train floor(sum/T) long. The datapath follows the
// converter figure; the saturation is this design's choice.
// Timing: purely combinational, one word per cycle; in_ready = out_ready.
module clp_a2s
  import hnn_pkg::*;
(
  input  local_pkt_t       in_pkt,
  input  logic             in_valid,
  output logic             in_ready,
  // potential store in the core SRAM (read side)
  output logic [AXON_W-1:0] v_addr,
  input  logic [7:0]        v_rdata,
  // to the core controller
  output pkt_type_e         out_type,
  output logic [AXON_W-1:0] out_axon,
  output logic [7:0]        out_value,
  output logic              out_valid,
  input  logic              out_ready
);
  logic [8:0] sum;

  assign v_addr    = in_pkt.axon;
  assign sum       = 9'(v_rdata) + 9'(in_pkt.payload);
  assign out_type  = in_pkt.ptype;
  assign out_axon  = in_pkt.axon;
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  // input mux selected by the packet type
  always_comb begin
    if (in_pkt.ptype == PKT_SPIKE) out_value = in_pkt.payload;
    else                           out_value = sum[8] ? 8'hFF : sum[7:0];
  end
endmodule
