// hnn_chip: one die of the hybrid spiking/artificial accelerator.
//
// An MESH_X x MESH_Y (8 x 8) mesh of core tiles joined by X-then-Y routed
// links. The 28 tiles on the mesh edge are spiking cores, the 36 interior
// tiles artificial cores, so dense 8-bit activations stay inside the die and
// only spikes reach the die-to-die interfaces. Each of the four sides has an
// EMIO block that merges the packets leaving its 8 edge cores onto one serial
// output link and splits the packets of its input link to the same 8 cores;
// a corner core belongs to two sides. Coordinates: x grows to the East, y to
// the North; the North side serves row y = MESH_Y-1, the East side column
// x = MESH_X-1. A packet that leaves the East side of one chip arrives at the
// West side of the next chip, at the core of the same row, and keeps
// travelling on its remaining dx/dy offsets.
// The mesh size, the spiking edge and artificial interior, and the EMIO per
// side follow the paper; the coordinate convention and the configuration bus
// are this design's choices.
// Interface: per side s in {N, E, S, W} an output link (tx_req, tx_data,
// tx_ack in) and an input link (rx_req, rx_data in, rx_ack); a global tick
// pulse; a configuration write bus addressed by core (x, y); busy and stall
// flags per core (index y*MESH_X + x).
module hnn_chip
  import hnn_pkg::*;
#(
  parameter int unsigned MESH_X     = 8,
  parameter int unsigned MESH_Y     = 8,
  parameter int unsigned AXONS      = 256,
  parameter int unsigned NEURONS    = 256,
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned SER_W      = 1,
  parameter int unsigned CFG_W      = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  // configuration
  input  logic             cfg_we,
  input  logic [2:0]       cfg_x,
  input  logic [2:0]       cfg_y,
  input  cfg_region_e      cfg_region,
  input  logic [7:0]       cfg_addr,
  input  logic [CFG_W-1:0] cfg_data,
  // die-to-die links, index N=0, E=1, S=2, W=3
  output logic             tx_req  [4],
  output logic [SER_W-1:0] tx_data [4],
  input  logic             tx_ack  [4],
  input  logic             rx_req  [4],
  input  logic [SER_W-1:0] rx_data [4],
  output logic             rx_ack  [4],
  // status
  output logic [MESH_X*MESH_Y-1:0] core_busy,
  output logic [MESH_X*MESH_Y-1:0] core_stall
);
  // link wires of every core, direction index N, E, S, W
  packet_t o_pkt [MESH_X][MESH_Y][4];
  logic    o_val [MESH_X][MESH_Y][4];
  logic    o_rdy [MESH_X][MESH_Y][4];
  packet_t i_pkt [MESH_X][MESH_Y][4];
  logic    i_val [MESH_X][MESH_Y][4];
  logic    i_rdy [MESH_X][MESH_Y][4];

  // EMIO side ports: N and S have MESH_X cores, E and W have MESH_Y
  localparam int unsigned SP = (MESH_X > MESH_Y) ? MESH_X : MESH_Y;
  packet_t e_in_pkt  [4][SP];
  logic    e_in_val  [4][SP];
  logic    e_in_rdy  [4][SP];
  packet_t e_out_pkt [4][SP];
  logic    e_out_val [4][SP];
  logic    e_out_rdy [4][SP];

  for (genvar x = 0; x < MESH_X; x++) begin : g_x
    for (genvar y = 0; y < MESH_Y; y++) begin : g_y
      localparam bit EDGE = (x == 0) || (x == MESH_X-1) || (y == 0) || (y == MESH_Y-1);
      logic sel_we;
      assign sel_we = cfg_we && (int'(cfg_x) == x) && (int'(cfg_y) == y);

      // ---- north (index 0) ----
      if (y == MESH_Y-1) begin : g_n_edge
        assign i_pkt[x][y][0] = e_out_pkt[0][x];
        assign i_val[x][y][0] = e_out_val[0][x];
        assign e_out_rdy[0][x] = i_rdy[x][y][0];
        assign e_in_pkt[0][x] = o_pkt[x][y][0];
        assign e_in_val[0][x] = o_val[x][y][0];
        assign o_rdy[x][y][0] = e_in_rdy[0][x];
      end else begin : g_n_mesh
        assign i_pkt[x][y][0] = o_pkt[x][y+1][2];
        assign i_val[x][y][0] = o_val[x][y+1][2];
        assign o_rdy[x][y][0] = i_rdy[x][y+1][2];
      end
      // ---- east (index 1) ----
      if (x == MESH_X-1) begin : g_e_edge
        assign i_pkt[x][y][1] = e_out_pkt[1][y];
        assign i_val[x][y][1] = e_out_val[1][y];
        assign e_out_rdy[1][y] = i_rdy[x][y][1];
        assign e_in_pkt[1][y] = o_pkt[x][y][1];
        assign e_in_val[1][y] = o_val[x][y][1];
        assign o_rdy[x][y][1] = e_in_rdy[1][y];
      end else begin : g_e_mesh
        assign i_pkt[x][y][1] = o_pkt[x+1][y][3];
        assign i_val[x][y][1] = o_val[x+1][y][3];
        assign o_rdy[x][y][1] = i_rdy[x+1][y][3];
      end
      // ---- south (index 2) ----
      if (y == 0) begin : g_s_edge
        assign i_pkt[x][y][2] = e_out_pkt[2][x];
        assign i_val[x][y][2] = e_out_val[2][x];
        assign e_out_rdy[2][x] = i_rdy[x][y][2];
        assign e_in_pkt[2][x] = o_pkt[x][y][2];
        assign e_in_val[2][x] = o_val[x][y][2];
        assign o_rdy[x][y][2] = e_in_rdy[2][x];
      end else begin : g_s_mesh
        assign i_pkt[x][y][2] = o_pkt[x][y-1][0];
        assign i_val[x][y][2] = o_val[x][y-1][0];
        assign o_rdy[x][y][2] = i_rdy[x][y-1][0];
      end
      // ---- west (index 3) ----
      if (x == 0) begin : g_w_edge
        assign i_pkt[x][y][3] = e_out_pkt[3][y];
        assign i_val[x][y][3] = e_out_val[3][y];
        assign e_out_rdy[3][y] = i_rdy[x][y][3];
        assign e_in_pkt[3][y] = o_pkt[x][y][3];
        assign e_in_val[3][y] = o_val[x][y][3];
        assign o_rdy[x][y][3] = e_in_rdy[3][y];
      end else begin : g_w_mesh
        assign i_pkt[x][y][3] = o_pkt[x-1][y][1];
        assign i_val[x][y][3] = o_val[x-1][y][1];
        assign o_rdy[x][y][3] = i_rdy[x-1][y][1];
      end

      if (EDGE) begin : g_snn
        snn_core #(.AXONS(AXONS), .NEURONS(NEURONS), .DEPTH(DEPTH),
                   .FIFO_DEPTH(FIFO_DEPTH), .CFG_W(CFG_W)) u_core (
          .clk, .rst_n, .tick,
          .cfg_we(sel_we), .cfg_region, .cfg_addr, .cfg_data,
          .nb_in_pkt(i_pkt[x][y]), .nb_in_valid(i_val[x][y]), .nb_in_ready(i_rdy[x][y]),
          .nb_out_pkt(o_pkt[x][y]), .nb_out_valid(o_val[x][y]), .nb_out_ready(o_rdy[x][y]),
          .busy(core_busy[y*MESH_X + x]), .stall(core_stall[y*MESH_X + x]));
      end else begin : g_ann
        ann_core #(.AXONS(AXONS), .NEURONS(NEURONS), .DEPTH(DEPTH),
                   .FIFO_DEPTH(FIFO_DEPTH), .CFG_W(CFG_W)) u_core (
          .clk, .rst_n, .tick,
          .cfg_we(sel_we), .cfg_region, .cfg_addr, .cfg_data,
          .nb_in_pkt(i_pkt[x][y]), .nb_in_valid(i_val[x][y]), .nb_in_ready(i_rdy[x][y]),
          .nb_out_pkt(o_pkt[x][y]), .nb_out_valid(o_val[x][y]), .nb_out_ready(o_rdy[x][y]),
          .busy(core_busy[y*MESH_X + x]), .stall(core_stall[y*MESH_X + x]));
      end
    end
  end

  // EMIO sides; N/S serve MESH_X cores, E/W serve MESH_Y cores
  for (genvar s = 0; s < 4; s++) begin : g_side
    localparam int unsigned NP = (s == 0 || s == 2) ? MESH_X : MESH_Y;
    packet_t cin_pkt [NP];
    logic    cin_val [NP];
    logic    cin_rdy [NP];
    packet_t cout_pkt[NP];
    logic    cout_val[NP];
    logic    cout_rdy[NP];
    for (genvar k = 0; k < NP; k++) begin : g_k
      assign cin_pkt[k]      = e_in_pkt[s][k];
      assign cin_val[k]      = e_in_val[s][k];
      assign e_in_rdy[s][k]  = cin_rdy[k];
      assign e_out_pkt[s][k] = cout_pkt[k];
      assign e_out_val[s][k] = cout_val[k];
      assign cout_rdy[k]     = e_out_rdy[s][k];
    end
    for (genvar k = NP; k < SP; k++) begin : g_pad
      assign e_in_rdy[s][k]  = 1'b0;
      assign e_out_pkt[s][k] = '0;
      assign e_out_val[s][k] = 1'b0;
    end
    emio #(.PORTS(NP), .FIFO_DEPTH(FIFO_DEPTH), .SER_W(SER_W)) u_emio (
      .clk, .rst_n,
      .core_in_pkt(cin_pkt), .core_in_valid(cin_val), .core_in_ready(cin_rdy),
      .core_out_pkt(cout_pkt), .core_out_valid(cout_val), .core_out_ready(cout_rdy),
      .tx_req(tx_req[s]), .tx_data(tx_data[s]), .tx_ack(tx_ack[s]),
      .rx_req(rx_req[s]), .rx_data(rx_data[s]), .rx_ack(rx_ack[s]));
  end

  initial begin
    assert (MESH_X <= 8 && MESH_Y <= 8) else $error("EMIO core index is 3 bits: at most 8 cores per side");
    assert (MESH_X >= 3 && MESH_Y >= 3) else $error("mesh needs an interior");
  end
endmodule
