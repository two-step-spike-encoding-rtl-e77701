// tb_omem: fills the omem with random words, reads every address back
// (data one cycle after the read enable), then mixes random writes and reads
// and compares every read with a copy kept by the testbench.
module tb_omem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] model [1024];
  int checks = 0, failures = 0;

  omem #(.DEPTH(1024)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 1024; a++) begin
      re = 1; raddr = 10'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) failures++;
    end
    for (int i = 0; i < 3000; i++) begin
      we = ($urandom % 2 == 0); waddr = 10'($urandom); wdata = {$urandom, $urandom};
      re = 1; raddr = 10'($urandom);
      if (we && waddr == raddr) we = 0;
      @(negedge clk);
      checks++;
      if (rdata != model[raddr]) failures++;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
