// hnn_pkg: types and constants shared by the hybrid spiking/artificial NoC.
//
// A NoC packet is 35 bits: a signed 9-bit X offset (dx), a signed 9-bit Y
// offset (dy), a 1-bit type (0 = dense activation, 1 = spike), an 8-bit axon
// index and an 8-bit payload. An activation packet carries its 8-bit value in
// the payload; a spike packet carries a 4-bit delivery tick in payload[3:0]
// with payload[7:4] as padding. The field widths are the ones of the packet
// table; their order inside the word and the signed, relative meaning of dx/dy
// are this design's choice. What the router hands to a core is the 17-bit
// local word {type, axon, payload}. At the chip edge the packet is tagged with
// a 3-bit index of the edge core it left from, making the 38-bit link word.
package hnn_pkg;

  localparam int unsigned DX_W      = 9;
  localparam int unsigned DY_W      = 9;
  localparam int unsigned AXON_W    = 8;
  localparam int unsigned PAYLOAD_W = 8;
  localparam int unsigned TICK_W    = 4;
  localparam int unsigned PKT_W     = DX_W + DY_W + 1 + AXON_W + PAYLOAD_W; // 35
  localparam int unsigned LOCAL_W   = 1 + AXON_W + PAYLOAD_W;               // 17
  localparam int unsigned TAG_W     = 3;
  localparam int unsigned LINK_W    = TAG_W + PKT_W;                        // 38

  typedef enum logic {PKT_ACT = 1'b0, PKT_SPIKE = 1'b1} pkt_type_e;

  typedef struct packed {
    logic signed [DX_W-1:0] dx;
    logic signed [DY_W-1:0] dy;
    pkt_type_e              ptype;
    logic [AXON_W-1:0]      axon;
    logic [PAYLOAD_W-1:0]   payload;
  } packet_t;

  typedef struct packed {
    pkt_type_e              ptype;
    logic [AXON_W-1:0]      axon;
    logic [PAYLOAD_W-1:0]   payload;
  } local_pkt_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    packet_t          pkt;
  } link_word_t;

  // Router port numbering.
  typedef enum logic [2:0] {
    P_NORTH = 3'd0, P_EAST = 3'd1, P_SOUTH = 3'd2, P_WEST = 3'd3, P_LOCAL = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // Per-neuron configuration held in the core SRAM next to the crossbar.
  // Four weights are selected by the 2-bit type of the incoming axon.
  typedef struct packed {
    logic signed [3:0][7:0] weight;   // weight per axon type
    logic signed [7:0]      thresh;   // SNN firing threshold
    logic [2:0]             leak_k;   // SNN: beta = 1 - 2^-k (k=0: no memory)
    logic [4:0]             shift;    // ANN: requantisation shift
    logic                   dest_en;  // neuron output is sent
    logic signed [DX_W-1:0] dest_dx;
    logic signed [DY_W-1:0] dest_dy;
    logic [AXON_W-1:0]      dest_axon;
    logic [TICK_W-1:0]      dest_tick; // delivery tick of outgoing spikes
  } neuron_cfg_t;
  localparam int unsigned NCFG_W = $bits(neuron_cfg_t);

  // Configuration write: one word, addressed by region and index.
  typedef enum logic [1:0] {
    CFG_XBAR = 2'd0,   // crossbar row: connections of one axon to all neurons
    CFG_NEUR = 2'd1,   // neuron_cfg_t of one neuron
    CFG_ATYP = 2'd2,   // 2-bit type of one axon
    CFG_CTRL = 2'd3    // core controller registers
  } cfg_region_e;

  // Rate coding of an activation a over a window of T ticks: the train has
  // floor(a/T) spikes, in ticks 0 .. floor(a/T)-1.
  function automatic logic [7:0] rate_count(input logic [7:0] a, input logic [4:0] t_win);
    return (t_win == 0) ? 8'd0 : a / 8'(t_win);
  endfunction

  // Inverse mapping of a spike count S over T ticks to an 8-bit activation:
  // floor((2^8 - 1) * S / T), saturated at 255.
  function automatic logic [7:0] spike_to_act(input logic [7:0] s, input logic [4:0] t_win);
    logic [15:0] v;
    v = (t_win == 0) ? 16'd0 : (16'd255 * 16'(s)) / 16'(t_win);
    return (v > 16'd255) ? 8'd255 : v[7:0];
  endfunction

endpackage
