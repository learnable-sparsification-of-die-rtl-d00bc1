// ann_core: an artificial core tile, placed in the interior of the mesh.
//
// It holds the five blocks of a core: the packet router, the cross-layer
// converter (spike to activation), the packet scheduler (16 rows of 256 8-bit
// entries), the core SRAM and the MAC block (256 lanes of 8b x 8b MAC, 32-bit
// accumulators), sequenced by the core controller. Activation packets are
// stored per axon; spike packets from a spiking core are counted per axon and
// turned into activations with floor(255*S/T). On a pass (every pass_period
// ticks; set it to T when the inputs are spike counts) the core runs every
// axon through the MAC lanes and sends one 8-bit activation packet per enabled
// neuron. The composition follows the core figure of the paper; see the
// sub-blocks for what is this design's choice.
// Interface: mesh links N/E/S/W (35-bit packets, valid/ready), a global tick
// pulse and a configuration write port.
module ann_core
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

  // ---------------- converter, scheduler, MAC lanes ----------------
  clp_s2a u_conv (
    .t_win, .in_pkt(rx), .in_valid(r_out_valid[P_LOCAL]), .in_ready(r_out_ready[P_LOCAL]),
    .s_addr(as_a_axon), .s_rdata(as_a_rdata),
    .out_is_count(cv_is_count), .out_axon(cv_axon), .out_value(cv_value),
    .out_valid(cv_valid), .out_ready(cv_ready));
  assign cv_type = PKT_ACT;
  assign v_raddr = '0;

  ann_scheduler #(.DEPTH(DEPTH), .AXONS(AXONS)) u_sched (
    .clk, .rst_n,
    .a_axon(as_a_axon), .a_rdata(as_a_rdata), .a_we(as_we), .a_wdata(as_wdata),
    .a_wcount(as_wcount), .advance(as_advance),
    .b_axon(as_b_axon), .b_clear(as_b_clear), .b_rdata(as_b_rdata), .b_rcount(as_b_rcount));

  mac_block #(.NEURONS(NEURONS)) u_pe (
    .clk, .rst_n, .ncfg, .acc_en(pe_acc_en), .acc_row(x_row), .acc_type(x_type),
    .acc_act(pe_act), .step(pe_step), .act_out(emit_payload));

  assign emit_mask  = '1;
  assign ss_pop_row = '0;

  core_controller #(.IS_SNN(1'b0), .AXONS(AXONS), .NEURONS(NEURONS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .tick,
    .cfg_we, .cfg_region, .cfg_addr, .cfg_data(cfg_data[7:0]), .t_win,
    .cv_valid, .cv_ready, .cv_type, .cv_is_count, .cv_axon, .cv_value, .cv_v_old(8'd0),
    .ss_set_valid, .ss_set_axon, .ss_set_mask, .ss_pop, .ss_pop_row,
    .v_we, .v_waddr, .v_wdata, .v_clear,
    .as_we, .as_wdata, .as_wcount, .as_advance, .as_b_axon, .as_b_clear,
    .as_b_rdata, .as_b_rcount,
    .pe_axon, .pe_acc_en, .pe_act, .pe_step, .emit_mask, .emit_payload, .ncfg,
    .out_pkt(lo_pkt), .out_valid(lo_valid), .out_ready(lo_ready),
    .busy, .stall);
endmodule
