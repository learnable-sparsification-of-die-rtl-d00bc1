// tb_emio_serdes: self-checking test of the EMIO serializer and deserializer
// joined back to back by their REQ / ACK / DATA link.
// Random 38-bit link words are sent with random back-pressure on the
// receiving side. Every word must arrive intact and in order, the link must
// carry each word in exactly 38 cycles of REQ (one bit per cycle), and an
// idle link must deliver a word 39 cycles after the serializer takes it.
module tb_emio_serdes;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  link_word_t in_word, out_word; logic in_valid, in_ready, out_valid, out_ready, took;
  logic req, ack; logic [0:0] data;
  link_word_t q [$];
  int nsent = 0, nrecv = 0, req_cycles = 0, cyc = 0, t_take = 0;

  emio_serializer   u_tx (.clk, .rst_n, .in_word, .in_valid, .in_ready,
                          .link_req(req), .link_data(data), .link_ack(ack));
  emio_deserializer u_rx (.clk, .rst_n, .link_req(req), .link_data(data), .link_ack(ack),
                          .out_word, .out_valid, .out_ready);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic out_valid_q;
  always @(posedge clk) begin
    cyc++;
    took <= in_valid && in_ready;
    out_valid_q <= out_valid;
    if (rst_n) begin
      if (req) req_cycles++;
      if (in_valid && in_ready) begin q.push_back(in_word); t_take = cyc; end
      if (out_valid && !out_valid_q && nsent == 1)
        check(cyc - t_take == 39, $sformatf("first word latency %0d cycles", cyc - t_take));
      if (out_valid && out_ready) begin
        check(q.size() > 0 && out_word == q[0], "word intact and in order");
        if (q.size() > 0) void'(q.pop_front());
        nrecv++;
      end
    end
  end

  initial begin
    in_valid = 0; in_word = '0; out_ready = 0; took = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // first word on an idle link with the receiver ready
    @(negedge clk); out_ready = 1; in_word = link_word_t'({$urandom, $urandom}); in_valid = 1; nsent++;
    @(negedge clk); in_valid = 0;
    repeat (60) @(negedge clk);
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || took) begin
        if (c < 5000 && $urandom_range(0, 1)) begin
          in_word = link_word_t'({$urandom, $urandom}); in_valid = 1; nsent++;
        end else in_valid = 0;
      end
    end
    in_valid = 0; out_ready = 1;
    repeat (200) @(posedge clk);
    check(nsent == nrecv && nsent > 1, $sformatf("delivered %0d of %0d", nrecv, nsent));
    check(req_cycles == 38 * nsent, $sformatf("REQ cycles %0d for %0d words", req_cycles, nsent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
