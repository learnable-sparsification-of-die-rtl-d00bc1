// tb_ann_core: self-checking test of a full artificial core tile at its
// default size (256 axons, 256 MAC lanes).
// Activations for axons 0 and 1 and four spikes for axon 2 arrive on the
// South mesh input. After a tick the core must send, North with dy stepped
// from 1 to 0, neuron 0 = 2*10 + 3*5 = 35, neuron 1 = ReLU(-10) = 0 and
// neuron 2 = floor(255*4/16) = 63 (spike count converted to an activation).
// The pass must take one cycle per axon, 256 cycles, as the paper's
// cycles = MACs / (G * ceil(N/G)) gives for a 256 x 256 layer on one core.
module tb_ann_core;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, tick;
  logic cfg_we; cfg_region_e cfg_region; logic [7:0] cfg_addr; logic [255:0] cfg_data;
  packet_t nb_in_pkt [4], nb_out_pkt [4];
  logic nb_in_valid [4], nb_in_ready [4], nb_out_valid [4], nb_out_ready [4];
  logic busy, stall;
  packet_t got [$];
  int cyc = 0, t_tick = 0, t_first = 0, acc_cycles = 0;

  ann_core dut (.*);
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

  always @(posedge clk) begin
    cyc++;
    if (rst_n && nb_out_valid[0] && nb_out_ready[0]) begin
      if (got.size() == 0) t_first = cyc;
      got.push_back(nb_out_pkt[0]);
    end
    if (rst_n && dut.pe_acc_en) acc_cycles++;
  end

  task automatic cfg(input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we = 1; cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic send(input pkt_type_e t, input int axon, input int payload);
    @(negedge clk);
    nb_in_pkt[2] = '{dx: 9'sd0, dy: 9'sd0, ptype: t, axon: 8'(axon), payload: 8'(payload)};
    nb_in_valid[2] = 1;
    @(posedge clk); while (!nb_in_ready[2]) @(posedge clk);
    @(negedge clk); nb_in_valid[2] = 0;
  endtask

  initial begin
    neuron_cfg_t nc;
    tick = 0; cfg_we = 0; cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    for (int d = 0; d < 4; d++) begin nb_in_valid[d] = 0; nb_in_pkt[d] = '0; nb_out_ready[d] = 1; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      cfg(CFG_XBAR, a, (a == 0) ? 256'b011 : (a == 1) ? 256'b001 : (a == 2) ? 256'b100 : 256'b0);
      cfg(CFG_ATYP, a, (a == 1) ? 256'(1) : 256'(0));
    end
    for (int n = 0; n < 256; n++) begin
      nc = '0;
      if (n < 3) begin nc.dest_en = 1; nc.dest_dy = 9'sd1; nc.dest_axon = 8'(20 + n); end
      if (n == 0) begin nc.weight[0] = 8'sd2; nc.weight[1] = 8'sd3; end
      if (n == 1) nc.weight[0] = -8'sd1;
      if (n == 2) nc.weight[0] = 8'sd1;
      cfg(CFG_NEUR, n, 256'(nc));
    end
    cfg(CFG_CTRL, 2, 256'(16));
    cfg(CFG_CTRL, 0, 256'(1));

    send(PKT_ACT, 0, 10);
    send(PKT_ACT, 1, 5);
    for (int k = 0; k < 4; k++) send(PKT_SPIKE, 2, k);
    @(negedge clk); tick = 1; t_tick = cyc; @(negedge clk); tick = 0;
    repeat (400) @(negedge clk);
    check(got.size() == 3, $sformatf("activation packets %0d", got.size()));
    if (got.size() == 3) begin
      check(got[0].ptype == PKT_ACT && got[0].dy == 9'sd0 && got[0].axon == 8'd20 && got[0].payload == 8'd35, "neuron 0 = 35");
      check(got[1].axon == 8'd21 && got[1].payload == 8'd0, $sformatf("neuron 1 = ReLU(-10) = 0: got %0d axon %0d", got[1].payload, got[1].axon));
      check(got[2].axon == 8'd22 && got[2].payload == 8'd63, "neuron 2 = floor(255*4/16)");
    end
    check(acc_cycles == 256, $sformatf("pass took %0d MAC cycles", acc_cycles));
    check(t_first - t_tick >= 256 && t_first - t_tick <= 266, $sformatf("tick to first packet %0d cycles", t_first - t_tick));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
