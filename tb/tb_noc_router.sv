// tb_noc_router: self-checking test of the X-Y mesh router.
// All five inputs receive random packets with small random dx/dy offsets while
// the outputs accept at random. Each packet carries a unique id in its
// axon/payload fields. Every delivered packet must leave by the port that
// X-then-Y routing picks for its original offsets, with the travelled offset
// stepped by one, and every packet must be delivered exactly once.
// Contention on one output (arbitration) is counted and must occur.
module tb_noc_router;
  import hnn_pkg::*;
  int checks = 0, failures = 0, contention = 0;
  logic clk = 0, rst_n = 0;
  packet_t in_pkt [NPORTS], out_pkt [NPORTS];
  logic in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  packet_t sent [int];
  int nsent = 0, nrecv = 0;

  noc_router dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic port_e route(packet_t p);
    if (p.dx > 0) return P_EAST;
    if (p.dx < 0) return P_WEST;
    if (p.dy > 0) return P_NORTH;
    if (p.dy < 0) return P_SOUTH;
    return P_LOCAL;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // receive side: check and retire packets
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++)
      if (out_valid[o] && out_ready[o]) begin
        int id; packet_t orig, expo;
        id = {out_pkt[o].axon, out_pkt[o].payload};
        nrecv++;
        if (!sent.exists(id)) begin
          check(0, $sformatf("unknown packet id %0d", id));
        end else begin
          orig = sent[id];
          expo = orig;
          case (route(orig))
            P_EAST:  expo.dx = orig.dx - 1;
            P_WEST:  expo.dx = orig.dx + 1;
            P_NORTH: expo.dy = orig.dy - 1;
            P_SOUTH: expo.dy = orig.dy + 1;
            default: ;
          endcase
          check(int'(route(orig)) == o, $sformatf("id %0d left by %0d", id, o));
          check(out_pkt[o] == expo, $sformatf("id %0d offsets", id));
          sent.delete(id);
        end
      end
    for (int o = 0; o < NPORTS; o++) begin
      int r; r = 0;
      for (int i = 0; i < NPORTS; i++) r += int'(dut.req[o][i]);
      if (r > 1) contention++;
    end
  end

  initial begin
    for (int i = 0; i < NPORTS; i++) begin in_valid[i] = 0; in_pkt[i] = '0; out_ready[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int o = 0; o < NPORTS; o++) out_ready[o] = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < NPORTS; i++)
        if (!in_valid[i] || took[i]) begin
          if (c < 2500 && $urandom_range(0, 1)) begin
            in_pkt[i].dx = 9'($signed($urandom_range(0, 4)) - 2);
            in_pkt[i].dy = 9'($signed($urandom_range(0, 4)) - 2);
            in_pkt[i].ptype = pkt_type_e'($urandom_range(0, 1));
            {in_pkt[i].axon, in_pkt[i].payload} = 16'(nsent);
            sent[nsent] = in_pkt[i];
            nsent++;
            in_valid[i] = 1;
          end else in_valid[i] = 0;
        end
    end
    for (int i = 0; i < NPORTS; i++) in_valid[i] = 0;
    for (int o = 0; o < NPORTS; o++) out_ready[o] = 1;
    repeat (100) @(posedge clk);
    check(nrecv == nsent && sent.size() == 0, $sformatf("delivered %0d of %0d", nrecv, nsent));
    check(contention > 0, "output contention occurred");
    $display("contention cycles %0d, packets %0d", contention, nsent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handshake bookkeeping: took[i] is set when the offered packet was taken
  logic took [NPORTS];
  always @(posedge clk) for (int i = 0; i < NPORTS; i++) took[i] <= in_valid[i] && in_ready[i];
endmodule
