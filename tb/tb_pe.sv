// tb_pe: random spike / weight / clear sequence on one PE, compared with a
// running signed sum kept by the testbench.
module tb_pe;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, spike = 0;
  logic signed [W_BITS-1:0] weight = 0;
  logic signed [PSUM_BITS-1:0] psum;
  int checks = 0, failures = 0;
  longint model = 0;

  pe dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      clr = ($urandom % 50 == 0);
      spike = ($urandom % 2 == 0);
      weight = W_BITS'($urandom);
      @(posedge clk);
      if (clr) model = 0;
      else if (spike) model += weight;
      @(negedge clk);
      checks++;
      if (longint'(psum) != model) begin
        failures++;
        if (failures < 10) $display("step %0d psum %0d exp %0d", i, psum, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
