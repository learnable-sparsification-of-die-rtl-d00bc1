// tb_clp_a2s: self-checking test of the activation-to-spike converter.
// Random activation and spike words are applied; a model of the potential
// store answers the converter's read. Spikes must pass unchanged; activations
// must come out as the saturated sum of stored potential and activation.
module tb_clp_a2s;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  local_pkt_t in_pkt;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] v_addr, v_rdata, out_axon, out_value;
  pkt_type_e out_type;
  logic [7:0] vmem [256];

  clp_a2s dut (.*);
  assign v_rdata = vmem[v_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp;
    for (int i = 0; i < 256; i++) vmem[i] = 8'($urandom);
    vmem[5] = 8'd250;
    for (int i = 0; i < 400; i++) begin
      in_pkt.ptype   = pkt_type_e'($urandom_range(0, 1));
      in_pkt.axon    = (i == 0) ? 8'd5 : 8'($urandom);
      in_pkt.payload = (i == 0) ? 8'd100 : 8'($urandom);
      if (i == 0) in_pkt.ptype = PKT_ACT;
      in_valid  = 1'($urandom);
      out_ready = 1'($urandom);
      #1;
      check(out_valid == in_valid && in_ready == out_ready, "handshake passthrough");
      check(out_axon == in_pkt.axon && out_type == in_pkt.ptype, "axon/type");
      if (in_pkt.ptype == PKT_SPIKE) exp = in_pkt.payload;
      else begin
        exp = int'(vmem[in_pkt.axon]) + int'(in_pkt.payload);
        if (exp > 255) exp = 255;
      end
      check(out_value == 8'(exp), $sformatf("value %0d exp %0d", out_value, exp));
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
