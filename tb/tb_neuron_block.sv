// tb_neuron_block: self-checking test of the LIF neuron lanes.
// For several ticks a random set of axons, each with a random crossbar row and
// type, is integrated; after step the fired vector and potentials are
// compared with a reference LIF model: U <- sat8(U + ((I - U) >>> k)),
// fire when U >= threshold, then reset to 0.
module tb_neuron_block;
  import hnn_pkg::*;
  localparam int N = 16;
  int checks = 0, failures = 0, fires = 0;
  logic clk = 0, rst_n = 0;
  neuron_cfg_t ncfg [N];
  logic acc_en, step; logic [N-1:0] acc_row, fired; logic [1:0] acc_type;
  logic signed [7:0] potential [N];
  int mu [N], mi [N];

  neuron_block #(.NEURONS(N)) dut (.*);
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
      for (int w = 0; w < 4; w++) ncfg[n].weight[w] = 8'($urandom_range(0, 40) - 10);
      ncfg[n].thresh = 8'($urandom_range(10, 90));
      ncfg[n].leak_k = 3'($urandom_range(0, 3));
      mu[n] = 0; mi[n] = 0;
    end
    acc_en = 0; step = 0; acc_row = 0; acc_type = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int na;
      na = $urandom_range(0, 8);
      for (int k = 0; k < na; k++) begin
        @(negedge clk);
        acc_en = 1; acc_row = N'($urandom); acc_type = 2'($urandom);
        for (int n = 0; n < N; n++) if (acc_row[n]) begin logic signed [7:0] w8; w8 = ncfg[n].weight[acc_type]; mi[n] += int'(w8); end
      end
      @(negedge clk); acc_en = 0; step = 1;
      @(negedge clk); step = 0;
      for (int n = 0; n < N; n++) begin
        int u; bit f;
        u = mu[n] + ((mi[n] - mu[n]) >>> ncfg[n].leak_k);
        if (u > 127) u = 127;
        if (u < -128) u = -128;
        f = (u >= int'(ncfg[n].thresh));
        if (f) begin u = 0; fires++; end
        check(fired[n] == f, $sformatf("t%0d n%0d fired %0b exp %0b", t, n, fired[n], f));
        check(int'(potential[n]) == u, $sformatf("t%0d n%0d U %0d exp %0d", t, n, potential[n], u));
        mu[n] = u; mi[n] = 0;
      end
    end
    check(fires > 0, "some neuron fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
