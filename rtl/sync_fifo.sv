// sync_fifo: small single-clock FIFO with a valid/ready interface on both
// sides, used for the router input buffers and the EMIO merge/split buffers.
// The head word is visible on rd_data while rd_valid is high (first-word
// fall-through); a word moves when valid and ready are both high at a clock
// edge. wr_ready depends only on the fill level, never on rd_ready, so chains
// of FIFOs have no combinational path from one end to the other.
module sync_fifo #(
  parameter int unsigned WIDTH = 35,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_valid,
  output logic             wr_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid,
  input  logic             rd_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rp, wp;
  logic [AW:0]      cnt;
  logic             do_wr, do_rd;

  assign wr_ready = (cnt != (AW+1)'(DEPTH));
  assign rd_valid = (cnt != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (do_wr) wp <= nxt(wp);
      if (do_rd) rp <= nxt(rp);
      cnt <= cnt + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  // The fill level never exceeds the depth.
  a_no_over: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
