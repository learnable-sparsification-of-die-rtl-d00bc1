// snn_core: a spiking core tile, placed on the edge of the mesh next to the
// chip's die-to-die interfaces.
//
// It holds the five blocks of a core: the packet router, the cross-layer
// converter (activation to spike), the packet scheduler (16 x 256-bit spike
// rows), the core SRAM and the neuron block (256 LIF neurons), sequenced by
// the core controller. Spikes arriving from a neighbour chip or another core
// are scheduled for their delivery tick; activations arriving from the
// artificial interior are accumulated per axon and rate coded into a spike
// train. On each tick the core integrates the tick's active axons, updates
// its neurons and sends one spike packet per firing neuron. Only spikes leave
// a spiking core, which is what makes the chip-boundary traffic sparse.
// The composition follows the core figure of the paper; see the sub-blocks for
// what is this design's choice.
// Interface: mesh links N/E/S/W (35-bit packets, valid/ready), a global tick
// pulse and a configuration write port.
module snn_core
  import hnn_pkg::*;
#(
  parameter int unsigned AXONS      = 256,
  parameter int unsigned NEURONS    = 256,
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned CFG_W      = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  // configuration write, already decoded for this core
  input  logic             cfg_we,
  input  cfg_region_e      cfg_region,
  input  logic [7:0]       cfg_addr,
  input  logic [CFG_W-1:0] cfg_data,
  // mesh links, indexed N, E, S, W
  input  packet_t          nb_in_pkt   [4],
  input  logic             nb_in_valid [4],
  output logic             nb_in_ready [4],
  output packet_t          nb_out_pkt  [4],
  output logic             nb_out_valid[4],
  input  logic             nb_out_ready[4],
  // status
  output logic             busy,
  output logic             stall
);
  localparam int unsigned AW = $clog2(AXONS);

  // ---------------- packet router ----------------
  packet_t r_in_pkt [NPORTS], r_out_pkt [NPORTS];
  logic    r_in_valid [NPORTS], r_in_ready [NPORTS];
  logic    r_out_valid[NPORTS], r_out_ready[NPORTS];
  packet_t lo_pkt;
  logic    lo_valid, lo_ready;
  local_pkt_t rx;

  for (genvar p = 0; p < 4; p++) begin : g_nb
    assign r_in_pkt[p]    = nb_in_pkt[p];
    assign r_in_valid[p]  = nb_in_valid[p];
    assign nb_in_ready[p] = r_in_ready[p];
    assign nb_out_pkt[p]  = r_out_pkt[p];
    assign nb_out_valid[p]= r_out_valid[p];
    assign r_out_ready[p] = nb_out_ready[p];
  end
  assign r_in_pkt[P_LOCAL]   = lo_pkt;
  assign r_in_valid[P_LOCAL] = lo_valid;
  assign lo_ready            = r_in_ready[P_LOCAL];

  noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk, .rst_n,
    .in_pkt(r_in_pkt), .in_valid(r_in_valid), .in_ready(r_in_ready),
    .out_pkt(r_out_pkt), .out_valid(r_out_valid), .out_ready(r_out_ready));

  assign rx = '{ptype: r_out_pkt[P_LOCAL].ptype, axon: r_out_pkt[P_LOCAL].axon,
                payload: r_out_pkt[P_LOCAL].payload};

  // ---------------- shared wires ----------------
  logic [4:0]         t_win;
  logic               cv_valid, cv_ready, cv_is_count;
  pkt_type_e          cv_type;
  logic [AW-1:0]      cv_axon;
  logic [7:0]         cv_value;
  logic               ss_set_valid, ss_pop, v_we, v_clear;
  logic [AW-1:0]      ss_set_axon, v_waddr, v_raddr;
  logic [DEPTH-1:0]   ss_set_mask;
  logic [AXONS-1:0]   ss_pop_row;
  logic [7:0]         v_wdata, v_rdata;
  logic               as_we, as_wcount, as_advance, as_b_clear, as_b_rcount;
  logic [7:0]         as_wdata, as_b_rdata, as_a_rdata;
  logic [AW-1:0]      as_b_axon, as_a_axon;
  logic [AW-1:0]      pe_axon;
  logic               pe_acc_en, pe_step;
  logic [7:0]         pe_act;
  logic [NEURONS-1:0] x_row;
  logic [1:0]         x_type;
  logic [NEURONS-1:0] emit_mask;
  logic [7:0]         emit_payload [NEURONS];
  neuron_cfg_t        ncfg [NEURONS];

  core_sram #(.AXONS(AXONS), .NEURONS(NEURONS), .CFG_W(CFG_W)) u_sram (
    .clk, .rst_n, .cfg_we, .cfg_region, .cfg_addr, .cfg_data,
    .x_axon(pe_axon), .x_row, .x_type, .ncfg,
    .v_raddr, .v_rdata, .v_we, .v_waddr, .v_wdata, .v_clear);

  // ---------------- converter, scheduler, neurons ----------------
  assign cv_is_count = 1'b0;

  clp_a2s u_conv (
    .in_pkt(rx), .in_valid(r_out_valid[P_LOCAL]), .in_ready(r_out_ready[P_LOCAL]),
    .v_addr(v_raddr), .v_rdata,
    .out_type(cv_type), .out_axon(cv_axon), .out_value(cv_value),
    .out_valid(cv_valid), .out_ready(cv_ready));

  logic [$clog2(DEPTH)-1:0] sched_cur;
  snn_scheduler #(.DEPTH(DEPTH), .AXONS(AXONS)) u_sched (
    .clk, .rst_n, .set_valid(ss_set_valid), .set_axon(ss_set_axon),
    .set_mask(ss_set_mask), .pop(ss_pop), .pop_row(ss_pop_row), .cur(sched_cur));

  logic signed [7:0] potential [NEURONS];
  neuron_block #(.NEURONS(NEURONS)) u_pe (
    .clk, .rst_n, .ncfg, .acc_en(pe_acc_en), .acc_row(x_row), .acc_type(x_type),
    .step(pe_step), .fired(emit_mask), .potential);

  for (genvar n = 0; n < NEURONS; n++) begin : g_pl
    assign emit_payload[n] = 8'd0;
  end

  // the artificial-core scheduler port is not used in a spiking core
  assign as_b_rdata  = 8'd0;
  assign as_b_rcount = 1'b0;
  assign as_a_rdata  = 8'd0;
  assign as_a_axon   = '0;

  core_controller #(.IS_SNN(1'b1), .AXONS(AXONS), .NEURONS(NEURONS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .tick,
    .cfg_we, .cfg_region, .cfg_addr, .cfg_data(cfg_data[7:0]), .t_win,
    .cv_valid, .cv_ready, .cv_type, .cv_is_count, .cv_axon, .cv_value, .cv_v_old(v_rdata),
    .ss_set_valid, .ss_set_axon, .ss_set_mask, .ss_pop, .ss_pop_row,
    .v_we, .v_waddr, .v_wdata, .v_clear,
    .as_we, .as_wdata, .as_wcount, .as_advance, .as_b_axon, .as_b_clear,
    .as_b_rdata, .as_b_rcount,
    .pe_axon, .pe_acc_en, .pe_act, .pe_step, .emit_mask, .emit_payload, .ncfg,
    .out_pkt(lo_pkt), .out_valid(lo_valid), .out_ready(lo_ready),
    .busy, .stall);
endmodule
