// tb_imem: writes random values to random addresses of the input memory,
// then reads them back through all four read ports at once (each port at its
// own address, some ports disabled). Data must appear one cycle after the
// enable and a disabled port must hold its previous data.
module tb_imem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [11:0] waddr = 0;
  logic [7:0] wdata = 0;
  logic [3:0] re = 0;
  logic [11:0] raddr [4];
  logic [7:0] rdata [4];
  int model [4096];
  int checks = 0, failures = 0;

  imem #(.DEPTH(4096), .WIDTH(8), .NRD(4)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 4; p++) raddr[p] = '0;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); we = 1; waddr = 12'(a); wdata = 8'($urandom); model[a] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      automatic logic [7:0] prev [4] = rdata;
      re = 4'($urandom);
      for (int p = 0; p < 4; p++) raddr[p] = 12'($urandom);
      @(negedge clk);
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (re[p] ? (int'(rdata[p]) != model[raddr[p]]) : (rdata[p] != prev[p])) failures++;
      end
      // occasional overwrite
      if ($urandom % 4 == 0) begin
        re = '0; we = 1; waddr = 12'($urandom); wdata = 8'($urandom); model[waddr] = int'(wdata);
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
