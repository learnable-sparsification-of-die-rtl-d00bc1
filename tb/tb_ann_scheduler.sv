// tb_ann_scheduler: self-checking test of the artificial-core scheduler.
// Port A writes values and count flags into the fill row; advance makes it
// the pass row; port B reads and clears. A model of the 16-row ring checks
// every read of both ports.
module tb_ann_scheduler;
  localparam int D = 16, A = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [7:0] a_axon, a_rdata, a_wdata, b_axon, b_rdata;
  logic a_we, a_wcount, advance, b_clear, b_rcount;
  logic [8:0] model [D][A];
  int mcur = 0, mpass = D - 1;

  ann_scheduler #(.DEPTH(D), .AXONS(A)) dut (.*);
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
    for (int r = 0; r < D; r++) for (int a = 0; a < A; a++) model[r][a] = '0;
    a_we = 0; advance = 0; b_clear = 0; a_axon = 0; b_axon = 0; a_wdata = 0; a_wcount = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      a_axon   = 8'($urandom_range(0, 15));
      b_axon   = 8'($urandom_range(0, 15));
      a_we     = 1'($urandom);
      a_wdata  = 8'($urandom);
      a_wcount = 1'($urandom);
      advance  = ($urandom_range(0, 30) == 0);
      b_clear  = 1'($urandom);
      #1;
      check(a_rdata == model[mcur][a_axon][7:0], "port A read");
      check({b_rcount, b_rdata} == model[mpass][b_axon], "port B read");
      if (a_we)    model[mcur][a_axon] = {a_wcount, a_wdata};
      if (b_clear) model[mpass][b_axon] = '0;
      if (advance) begin mpass = mcur; mcur = (mcur + 1) % D; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
