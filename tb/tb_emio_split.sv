// tb_emio_split: self-checking test of the 1-to-8 EMIO split block.
// Random tagged link words are offered; each packet must appear, unchanged,
// on the output named by its tag, in order, with back-pressure from outputs
// that accept at random.
module tb_emio_split;
  import hnn_pkg::*;
  localparam int P = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  link_word_t in_word; logic in_valid, in_ready, took;
  packet_t out_pkt [P]; logic out_valid [P], out_ready [P];
  packet_t q [P][$];
  int nsent = 0, nrecv = 0;

  emio_split #(.PORTS(P)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    took <= in_valid && in_ready;
    if (rst_n) begin
      if (in_valid && in_ready) q[in_word.tag].push_back(in_word.pkt);
      for (int i = 0; i < P; i++)
        if (out_valid[i] && out_ready[i]) begin
          check(q[i].size() > 0 && out_pkt[i] == q[i][0], $sformatf("port %0d packet", i));
          if (q[i].size() > 0) void'(q[i].pop_front());
          nrecv++;
        end
    end
  end

  initial begin
    in_valid = 0; in_word = '0; took = 0;
    for (int i = 0; i < P; i++) out_ready[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++) out_ready[i] = ($urandom_range(0, 2) == 0);
      if (!in_valid || took) begin
        if (c < 2500 && $urandom_range(0, 1)) begin
          in_word = link_word_t'({$urandom, $urandom}); in_valid = 1; nsent++;
        end else in_valid = 0;
      end
    end
    in_valid = 0;
    for (int i = 0; i < P; i++) out_ready[i] = 1;
    repeat (100) @(posedge clk);
    check(nsent == nrecv && nsent > 0, $sformatf("delivered %0d of %0d", nrecv, nsent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
