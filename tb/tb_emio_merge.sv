// tb_emio_merge: self-checking test of the 8-to-1 EMIO merge block.
// Eight inputs offer numbered packets at random; the output accepts at
// random. Each link word must carry the index of the input its packet came
// from, and each input's packets must come out complete and in order.
module tb_emio_merge;
  import hnn_pkg::*;
  localparam int P = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  packet_t in_pkt [P]; logic in_valid [P], in_ready [P], took [P];
  link_word_t out_word; logic out_valid, out_ready;
  int nsent [P], nrecv [P];

  emio_merge #(.PORTS(P)) dut (.*);
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
    for (int i = 0; i < P; i++) took[i] <= in_valid[i] && in_ready[i];
    if (rst_n && out_valid && out_ready) begin
      int src;
      src = int'(out_word.pkt.axon);
      check(int'(out_word.tag) == src, "tag names the source core");
      check(int'(out_word.pkt.payload) == nrecv[src] % 256, "in order");
      nrecv[src]++;
    end
  end

  initial begin
    for (int i = 0; i < P; i++) begin in_valid[i] = 0; in_pkt[i] = '0; nsent[i] = 0; nrecv[i] = 0; took[i] = 0; end
    out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = 1'($urandom);
      for (int i = 0; i < P; i++)
        if (!in_valid[i] || took[i]) begin
          if (c < 2500 && $urandom_range(0, 7) == 0) begin
            in_pkt[i] = packet_t'({$urandom, $urandom});
            in_pkt[i].axon = 8'(i); in_pkt[i].payload = 8'(nsent[i]);
            nsent[i]++; in_valid[i] = 1;
          end else in_valid[i] = 0;
        end
    end
    for (int i = 0; i < P; i++) in_valid[i] = 0;
    out_ready = 1;
    repeat (100) @(posedge clk);
    for (int i = 0; i < P; i++) check(nsent[i] == nrecv[i] && nsent[i] > 0, $sformatf("port %0d count", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
