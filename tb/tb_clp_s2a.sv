// tb_clp_s2a: self-checking test of the spike-to-activation converter.
// Spike words inside the window must come out as the stored count plus one
// (saturating); spike words outside the window as floor(255*S/T); activation
// words unchanged. Windows T of 16 and 8 are tried.
module tb_clp_s2a;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic [4:0] t_win;
  local_pkt_t in_pkt;
  logic in_valid, in_ready, out_valid, out_ready, out_is_count;
  logic [7:0] s_addr, s_rdata, out_axon, out_value;
  logic [7:0] smem [256];

  clp_s2a dut (.*);
  assign s_rdata = smem[s_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp; bit cnt;
    for (int i = 0; i < 256; i++) smem[i] = 8'($urandom_range(0, 20));
    smem[7] = 8'd255;
    for (int i = 0; i < 600; i++) begin
      t_win = (i < 300) ? 5'd16 : 5'd8;
      in_pkt.ptype   = pkt_type_e'($urandom_range(0, 1));
      in_pkt.axon    = (i == 1) ? 8'd7 : 8'($urandom);
      in_pkt.payload = 8'($urandom);
      if (i == 1) begin in_pkt.ptype = PKT_SPIKE; in_pkt.payload = 8'd3; end
      in_valid  = 1'($urandom);
      out_ready = 1'($urandom);
      #1;
      check(out_valid == in_valid && in_ready == out_ready && out_axon == in_pkt.axon, "passthrough");
      if (in_pkt.ptype == PKT_ACT) begin
        exp = in_pkt.payload; cnt = 0;
      end else if (int'(in_pkt.payload[3:0]) < int'(t_win)) begin
        exp = int'(smem[in_pkt.axon]) + 1; if (exp > 255) exp = 255; cnt = 1;
      end else begin
        exp = (255 * int'(smem[in_pkt.axon])) / int'(t_win); if (exp > 255) exp = 255; cnt = 0;
      end
      check(out_value == 8'(exp) && out_is_count == cnt,
            $sformatf("i=%0d value %0d/%0b exp %0d/%0b", i, out_value, out_is_count, exp, cnt));
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
