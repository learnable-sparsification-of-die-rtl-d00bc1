// tb_snn_scheduler: self-checking test of the spiking-core scheduler.
// Random relative-row masks are written for random axons while rows are
// popped at random; a ring model predicts every popped row. Bits written to
// row 0 in the cycle of a pop must appear in that pop.
module tb_snn_scheduler;
  localparam int D = 16, A = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic set_valid, pop;
  logic [7:0] set_axon;
  logic [D-1:0] set_mask;
  logic [A-1:0] pop_row;
  logic [3:0] cur;
  logic [A-1:0] model [D];
  int mcur = 0;

  snn_scheduler #(.DEPTH(D), .AXONS(A)) dut (.*);
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
    for (int r = 0; r < D; r++) model[r] = '0;
    set_valid = 0; pop = 0; set_axon = 0; set_mask = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      set_valid = 1'($urandom_range(0, 3) != 0);
      set_axon  = 8'($urandom);
      set_mask  = ($urandom_range(0, 1)) ? D'(1) << $urandom_range(0, D-1) : D'($urandom);
      pop       = ($urandom_range(0, 3) == 0);
      #1;
      if (set_valid)
        for (int r = 0; r < D; r++) if (set_mask[r]) model[(mcur + r) % D][set_axon] = 1'b1;
      check(int'(cur) == mcur, "cur pointer");
      if (pop) begin
        check(pop_row == model[mcur], $sformatf("pop row %0d", mcur));
        model[mcur] = '0;
        mcur = (mcur + 1) % D;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
