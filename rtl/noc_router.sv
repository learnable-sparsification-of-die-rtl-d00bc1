// noc_router: one mesh router of the NoC (the "Packet Router" of a core tile).
//
// Five ports: North, East, South, West and Local (the core). Each input has a
// small FIFO. Routing is static dimension-order: a packet first travels in X
// until its dx offset is zero, then in Y until dy is zero, then it is handed
// to the local port. Offsets are relative and signed: dx > 0 goes East,
// dx < 0 West, dy > 0 North, dy < 0 South. On each hop the router moves the
// offset one step toward zero, so the packet arrives with dx = dy = 0.
// X-before-Y routing and the 9-bit dx/dy fields follow the paper; the sign
// convention, the FIFOs and round-robin output arbitration are this design's
// choices. An output port may take one packet per cycle; a head packet moves
// when its output's ready is high and it wins the arbitration.
// Timing: a packet written into an empty input FIFO can leave on the next
// cycle, one cycle per hop at best.
module noc_router
  import hnn_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  packet_t in_pkt   [NPORTS],
  input  logic    in_valid [NPORTS],
  output logic    in_ready [NPORTS],
  output packet_t out_pkt  [NPORTS],
  output logic    out_valid[NPORTS],
  input  logic    out_ready[NPORTS]
);
  packet_t          head     [NPORTS];
  logic             head_v   [NPORTS];
  logic             head_pop [NPORTS];
  port_e            route    [NPORTS];
  logic [NPORTS-1:0] req     [NPORTS]; // req[out][in]
  logic [NPORTS-1:0] gnt     [NPORTS];
  logic [2:0]       rr       [NPORTS]; // last winner per output

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_data(in_pkt[i]), .wr_valid(in_valid[i]), .wr_ready(in_ready[i]),
      .rd_data(head[i]), .rd_valid(head_v[i]), .rd_ready(head_pop[i]));

    always_comb begin
      if      (head[i].dx > 0) route[i] = P_EAST;
      else if (head[i].dx < 0) route[i] = P_WEST;
      else if (head[i].dy > 0) route[i] = P_NORTH;
      else if (head[i].dy < 0) route[i] = P_SOUTH;
      else                     route[i] = P_LOCAL;
    end
  end

  // Request matrix and round-robin grant per output.
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = head_v[i] && (route[i] == port_e'(o));
      gnt[o] = '0;
      for (int k = 1; k <= NPORTS; k++) begin
        int c;
        c = (int'(rr[o]) + k) % NPORTS;
        if (gnt[o] == '0 && req[o][c]) gnt[o][c] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) head_pop[i] = 1'b0;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = |req[o];
      out_pkt[o]   = '0;
      for (int i = 0; i < NPORTS; i++)
        if (gnt[o][i]) begin
          out_pkt[o] = head[i];
          head_pop[i] = out_ready[o];
        end
      // step the offset of the dimension being travelled toward zero
      case (port_e'(o))
        P_EAST:  out_pkt[o].dx = out_pkt[o].dx - 9'sd1;
        P_WEST:  out_pkt[o].dx = out_pkt[o].dx + 9'sd1;
        P_NORTH: out_pkt[o].dy = out_pkt[o].dy - 9'sd1;
        P_SOUTH: out_pkt[o].dy = out_pkt[o].dy + 9'sd1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) rr[o] <= 3'(NPORTS-1);
    end else begin
      for (int o = 0; o < NPORTS; o++)
        if (out_valid[o] && out_ready[o])
          for (int i = 0; i < NPORTS; i++)
            if (gnt[o][i]) rr[o] <= 3'(i);
    end
  end

  // A granted packet holds its output stable until it is taken.
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt[o]));
  end
endmodule
