// snn_scheduler: packet scheduler of a spiking core.
//
// A ring of DEPTH rows of AXONS bits (16 x 256 by default, 0.5 KB): row r
// holds, one bit per axon, the spikes to be delivered r ticks after the row
// that the next tick consumes (the row pointed to by cur). The core
// controller sets bits with a mask of rows relative to cur, so one write can
// place a single delayed spike (one bit of the mask) or a whole rate-coded
// spike train (the first n bits of the mask). On pop, the row at cur is
// presented on pop_row, cleared and cur advances: that row is the set of
// active axons for this tick. The 16 x 256-bit size is the paper's; the
// relative addressing is this design's choice.
// Timing: set and pop take effect at the clock edge; a bit set for row cur in
// the same cycle as a pop is included in pop_row.
module snn_scheduler #(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned AXONS  = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     set_valid,
  input  logic [$clog2(AXONS)-1:0] set_axon,
  input  logic [DEPTH-1:0]         set_mask,   // bit r: row cur + r
  input  logic                     pop,
  output logic [AXONS-1:0]         pop_row,
  output logic [$clog2(DEPTH)-1:0] cur
);
  localparam int unsigned DW = $clog2(DEPTH);
  logic [AXONS-1:0] rows [DEPTH];

  always_comb begin
    pop_row = rows[cur];
    if (set_valid && set_mask[0]) pop_row[set_axon] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      for (int r = 0; r < DEPTH; r++) rows[r] <= '0;
    end else begin
      if (set_valid)
        for (int r = 0; r < DEPTH; r++)
          if (set_mask[r]) rows[DW'((int'(cur) + r) % DEPTH)][set_axon] <= 1'b1;
      if (pop) begin
        rows[cur] <= '0;
        cur <= DW'((int'(cur) + 1) % DEPTH);
      end
    end
  end
endmodule
