// ann_scheduler: packet scheduler of an artificial core.
//
// A ring of DEPTH rows, each holding one 8-bit value per axon (16 x 2048 bits
// by default, 4 KB) plus, per entry, a flag telling whether the value is an
// activation or a spike count still to be converted. Incoming data is written
// into the row at cur (port A, which also has a combinational read used by the
// spike-to-activation converter for its read-modify-write of the count). When
// a pass starts, advance makes the row at cur the pass row and moves cur on,
// so packets that arrive during a pass fill the next row. The pass reads its
// row one axon per cycle on port B and clears each entry it reads. The
// 16 x 2048-bit size is the paper's; the per-entry flag and the ring use of
// the rows are this design's choice.
module ann_scheduler #(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned AXONS  = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // port A: fill
  input  logic [$clog2(AXONS)-1:0] a_axon,
  output logic [7:0]               a_rdata,
  input  logic                     a_we,
  input  logic [7:0]               a_wdata,
  input  logic                     a_wcount,
  // pass control
  input  logic                     advance,
  // port B: pass read and clear
  input  logic [$clog2(AXONS)-1:0] b_axon,
  input  logic                     b_clear,
  output logic [7:0]               b_rdata,
  output logic                     b_rcount
);
  localparam int unsigned DW = $clog2(DEPTH);
  logic [8:0]    mem [DEPTH][AXONS]; // {is_count, value}
  logic [DW-1:0] cur, pass_row;

  assign a_rdata  = mem[cur][a_axon][7:0];
  assign b_rdata  = mem[pass_row][b_axon][7:0];
  assign b_rcount = mem[pass_row][b_axon][8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur      <= '0;
      pass_row <= DW'(DEPTH-1);
      for (int r = 0; r < DEPTH; r++)
        for (int a = 0; a < AXONS; a++) mem[r][a] <= '0;
    end else begin
      if (a_we)    mem[cur][a_axon] <= {a_wcount, a_wdata};
      if (b_clear) mem[pass_row][b_axon] <= '0;
      if (advance) begin
        pass_row <= cur;
        cur      <= DW'((int'(cur) + 1) % DEPTH);
      end
    end
  end

  a_rows_differ: assert property (@(posedge clk) disable iff (!rst_n) cur != pass_row);
endmodule
