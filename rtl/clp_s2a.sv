// clp_s2a: cross-layer packet converter of an artificial core, spike to
// activation.
//
// The type bit of the 17-bit local word selects the path. An activation packet
// passes straight to the input mux as {axon, a_i}. A spike packet is split into
// its axon index and its 4-bit delivery tick. The axon's current spike count
// S_n is read from the packet scheduler. If the tick lies inside the
// accumulation window (tick < T, the "<16?" comparator of the converter
// figure with T = 16 by default) the count is incremented, S_n+1, and handed
// on as a count to be written back into the scheduler. A spike whose tick is
// outside the window instead closes that axon's window: the stored count is
// turned into an activation with the inverse rate mapping
// floor(255 * S / T) and handed on as an activation. Counts saturate at 255.
// The comparator, the +1 and the scheduler read-modify-write follow the
// figure; using eq. (3) for the conversion, rather than the raw count the
// figure wires out, follows the text. Whole windows are converted by the core
// controller when it reads the scheduler.
// Timing: purely combinational, one word per cycle; in_ready = out_ready.
module clp_s2a
  import hnn_pkg::*;
(
  input  logic [4:0]        t_win,     // window length T (1..16)
  input  local_pkt_t        in_pkt,
  input  logic              in_valid,
  output logic              in_ready,
  // scheduler count of the addressed axon (read side)
  output logic [AXON_W-1:0] s_addr,
  input  logic [7:0]        s_rdata,
  // to the core controller
  output logic              out_is_count, // value is a spike count S_n+1
  output logic [AXON_W-1:0] out_axon,
  output logic [7:0]        out_value,
  output logic              out_valid,
  input  logic              out_ready
);
  logic [TICK_W-1:0] tick;
  logic              in_window;

  assign tick      = in_pkt.payload[TICK_W-1:0];
  assign in_window = ({1'b0, tick} < t_win);
  assign s_addr    = in_pkt.axon;
  assign out_axon  = in_pkt.axon;
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_comb begin
    out_is_count = 1'b0;
    out_value    = in_pkt.payload;
    if (in_pkt.ptype == PKT_SPIKE) begin
      if (in_window) begin
        out_is_count = 1'b1;
        out_value    = (s_rdata == 8'hFF) ? 8'hFF : s_rdata + 8'd1;
      end else begin
        out_value    = spike_to_act(s_rdata, t_win);
      end
    end
  end
endmodule
