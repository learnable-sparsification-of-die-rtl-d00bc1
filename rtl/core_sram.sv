// core_sram: the core memory of one tile, shared by spiking and artificial
// cores.
//
// It holds, as the paper lists for its core SRAM, the synaptic connections
// (a crossbar of AXONS rows by NEURONS bits: bit n of row a connects axon a to
// neuron n), the neuron parameters and weights, and each neuron's packet
// destination and delivery tick (see neuron_cfg_t). Like TrueNorth/RANC, on
// which the paper bases its cores, weights are not stored per synapse: each
// axon has a 2-bit type and each neuron four weights, one per type (the
// paper's 64k synapses in under 14 KB leave no room for per-synapse weights).
// Each axon also has an 8-bit input potential V_i into which the
// activation-to-spike converter accumulates incoming activations.
// Reads are combinational: the crossbar row and type of one axon for the
// processing element, the potential of one axon for the converter, and all
// neuron parameters in parallel for the processing-element lanes. Writes come
// from the configuration port, one row or entry per cycle, and from the
// controller's potential write-back. The exact entry layout (and so its
// width) is this design's; the paper gives 256 x 410 bits (SNN) and
// 256 x 440 bits (ANN) without the field list that would reproduce them.
module core_sram
  import hnn_pkg::*;
#(
  parameter int unsigned AXONS   = 256,
  parameter int unsigned NEURONS = 256,
  parameter int unsigned CFG_W   = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration write
  input  logic                     cfg_we,
  input  cfg_region_e              cfg_region,
  input  logic [7:0]               cfg_addr,
  input  logic [CFG_W-1:0]         cfg_data,
  // crossbar and axon type read
  input  logic [$clog2(AXONS)-1:0] x_axon,
  output logic [NEURONS-1:0]       x_row,
  output logic [1:0]               x_type,
  // neuron parameters, all lanes
  output neuron_cfg_t              ncfg [NEURONS],
  // axon input potentials
  input  logic [$clog2(AXONS)-1:0] v_raddr,
  output logic [7:0]               v_rdata,
  input  logic                     v_we,
  input  logic [$clog2(AXONS)-1:0] v_waddr,
  input  logic [7:0]               v_wdata,
  input  logic                     v_clear
);
  localparam int unsigned AW = $clog2(AXONS);
  localparam int unsigned NW = $clog2(NEURONS);

  logic [NEURONS-1:0] xbar  [AXONS];
  logic [1:0]         atype [AXONS];
  logic [7:0]         vpot  [AXONS];

  assign x_row   = xbar[x_axon];
  assign x_type  = atype[x_axon];
  assign v_rdata = vpot[v_raddr];

  always_ff @(posedge clk)
    if (cfg_we) begin
      case (cfg_region)
        CFG_XBAR: xbar[AW'(cfg_addr)]  <= cfg_data[NEURONS-1:0];
        CFG_NEUR: ncfg[NW'(cfg_addr)]  <= neuron_cfg_t'(cfg_data[NCFG_W-1:0]);
        CFG_ATYP: atype[AW'(cfg_addr)] <= cfg_data[1:0];
        default: ;
      endcase
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < AXONS; a++) vpot[a] <= '0;
    end else if (v_clear) begin
      for (int a = 0; a < AXONS; a++) vpot[a] <= '0;
    end else if (v_we) begin
      vpot[v_waddr] <= v_wdata;
    end
  end
endmodule
