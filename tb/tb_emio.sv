// tb_emio: self-checking test of one EMIO side with its output link looped
// back to its input link.
// The eight core inputs send numbered packets; each must come back, intact
// and in order, on the core output of the same index, after merge, 38-cycle
// serialization, deserialization and split. The test counts how often the
// merge had several cores waiting (port multiplexing) and requires it.
module tb_emio;
  import hnn_pkg::*;
  localparam int P = 8;
  int checks = 0, failures = 0, muxed = 0;
  logic clk = 0, rst_n = 0;
  packet_t cin [P], cout [P]; logic cin_v [P], cin_r [P], cout_v [P], cout_r [P], took [P];
  logic req, ack; logic [0:0] data;
  packet_t q [P][$];
  int nsent = 0, nrecv = 0;

  emio #(.PORTS(P)) dut (
    .clk, .rst_n,
    .core_in_pkt(cin), .core_in_valid(cin_v), .core_in_ready(cin_r),
    .core_out_pkt(cout), .core_out_valid(cout_v), .core_out_ready(cout_r),
    .tx_req(req), .tx_data(data), .tx_ack(ack),
    .rx_req(req), .rx_data(data), .rx_ack(ack));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    int w; w = 0;
    for (int i = 0; i < P; i++) begin
      took[i] <= cin_v[i] && cin_r[i];
      if (rst_n && cin_v[i] && cin_r[i]) q[i].push_back(cin[i]);
      if (rst_n && cout_v[i] && cout_r[i]) begin
        check(q[i].size() > 0 && cout[i] == q[i][0], $sformatf("core %0d packet", i));
        if (q[i].size() > 0) void'(q[i].pop_front());
        nrecv++;
      end
      w += int'(dut.u_merge.head_v[i]);
    end
    if (w > 1) muxed++;
  end

  initial begin
    for (int i = 0; i < P; i++) begin cin_v[i] = 0; cin[i] = '0; cout_r[i] = 0; took[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++) begin
        cout_r[i] = 1'($urandom);
        if (!cin_v[i] || took[i]) begin
          if (c < 15000 && $urandom_range(0, 99) == 0) begin
            cin[i] = packet_t'({$urandom, $urandom}); cin_v[i] = 1; nsent++;
          end else cin_v[i] = 0;
        end
      end
    end
    for (int i = 0; i < P; i++) begin cin_v[i] = 0; cout_r[i] = 1; end
    repeat (3000) @(posedge clk);
    check(nsent == nrecv && nsent > 0, $sformatf("delivered %0d of %0d", nrecv, nsent));
    check(muxed > 0, "several cores waiting on the link");
    $display("packets %0d, multiplexed cycles %0d", nsent, muxed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
