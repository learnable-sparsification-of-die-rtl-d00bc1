// tb_core_sram: self-checking test of the core memory.
// Random crossbar rows, axon types and neuron parameters are written through
// the configuration port and read back on the combinational ports; the axon
// potential store is written, read and cleared.
module tb_core_sram;
  import hnn_pkg::*;
  localparam int A = 32, N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_we; cfg_region_e cfg_region; logic [7:0] cfg_addr; logic [255:0] cfg_data;
  logic [4:0] x_axon, v_raddr, v_waddr; logic [N-1:0] x_row; logic [1:0] x_type;
  neuron_cfg_t ncfg [N];
  logic [7:0] v_rdata, v_wdata; logic v_we, v_clear;
  logic [N-1:0] mx [A]; logic [1:0] mt [A]; neuron_cfg_t mn [N]; logic [7:0] mv [A];

  core_sram #(.AXONS(A), .NEURONS(N), .CFG_W(256)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we = 1; cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; v_we = 0; v_clear = 0; x_axon = 0; v_raddr = 0; v_waddr = 0; v_wdata = 0;
    cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < A; a++) begin
      mx[a] = N'($urandom); mt[a] = 2'($urandom);
      wr(CFG_XBAR, a, 256'(mx[a])); wr(CFG_ATYP, a, 256'(mt[a]));
    end
    for (int n = 0; n < N; n++) begin
      mn[n] = neuron_cfg_t'({$urandom, $urandom, $urandom});
      wr(CFG_NEUR, n, 256'(mn[n]));
    end
    for (int a = 0; a < A; a++) begin
      x_axon = 5'(a); #1;
      check(x_row == mx[a] && x_type == mt[a], $sformatf("xbar/type axon %0d", a));
    end
    for (int n = 0; n < N; n++) check(ncfg[n] == mn[n], $sformatf("neuron cfg %0d", n));
    for (int a = 0; a < A; a++) begin
      mv[a] = 8'($urandom);
      @(negedge clk); v_we = 1; v_waddr = 5'(a); v_wdata = mv[a];
    end
    @(negedge clk); v_we = 0;
    for (int a = 0; a < A; a++) begin v_raddr = 5'(a); #1; check(v_rdata == mv[a], "potential"); end
    @(negedge clk); v_clear = 1; @(negedge clk); v_clear = 0;
    for (int a = 0; a < A; a++) begin v_raddr = 5'(a); #1; check(v_rdata == 0, "potential clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
