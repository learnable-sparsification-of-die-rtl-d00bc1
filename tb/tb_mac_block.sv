// tb_mac_block: self-checking test of the MAC lanes.
// Random axons with crossbar row, type and activation are accumulated; after
// step each output must equal clip(ReLU(sum(w*a) >>> shift), 0, 255).
module tb_mac_block;
  import hnn_pkg::*;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  neuron_cfg_t ncfg [N];
  logic acc_en, step; logic [N-1:0] acc_row; logic [1:0] acc_type; logic [7:0] acc_act;
  logic [7:0] act_out [N];
  longint macc [N];

  mac_block #(.NEURONS(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      ncfg[n] = '0;
      for (int w = 0; w < 4; w++) ncfg[n].weight[w] = 8'($urandom_range(0, 255));
      ncfg[n].shift = 5'($urandom_range(4, 9));
      macc[n] = 0;
    end
    acc_en = 0; step = 0; acc_row = 0; acc_type = 0; acc_act = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int k = 0; k < 32; k++) begin
        @(negedge clk);
        acc_en = 1; acc_row = N'($urandom); acc_type = 2'($urandom); acc_act = 8'($urandom);
        for (int n = 0; n < N; n++)
          if (acc_row[n]) begin logic signed [7:0] w8; w8 = ncfg[n].weight[acc_type]; macc[n] += longint'(w8) * longint'(acc_act); end
      end
      @(negedge clk); acc_en = 0; step = 1;
      @(negedge clk); step = 0;
      for (int n = 0; n < N; n++) begin
        longint q;
        q = macc[n] >>> ncfg[n].shift;
        if (q < 0) q = 0;
        if (q > 255) q = 255;
        check(act_out[n] == 8'(q), $sformatf("t%0d n%0d out %0d exp %0d", t, n, act_out[n], q));
        macc[n] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
