// tb_wmem: fills the wmem with random words, reads every address back
// (data one cycle after the read enable), then mixes random writes and reads
// and compares every read with a copy kept by the testbench.
module tb_wmem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [10:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] model [2048];
  int checks = 0, failures = 0;

  wmem #(.DEPTH(2048)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); we = 1; waddr = 11'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 2048; a++) begin
      re = 1; raddr = 11'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) failures++;
    end
    for (int i = 0; i < 3000; i++) begin
      we = ($urandom % 2 == 0); waddr = 11'($urandom); wdata = {$urandom, $urandom};
      re = 1; raddr = 11'($urandom);
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
