// tb_neighborhood_mem: a three-read-port instance (the tetrahedron case):
// random writes, then random same-cycle reads on all ports compared with a
// model; reads are asynchronous, writes take effect at the clock edge.
module tb_neighborhood_mem;
  localparam int W = 32, DEPTH = 64, NRD = 3;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic [AW-1:0] raddr [NRD];
  logic [W-1:0] rdata [NRD];
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  neighborhood_mem #(.W(W), .DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NRD; k++) raddr[k] = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom_range(1);
      waddr = AW'($urandom_range(DEPTH - 1));
      wdata = $urandom;
      for (int k = 0; k < NRD; k++) raddr[k] = AW'($urandom_range(DEPTH - 1));
      #1;
      for (int k = 0; k < NRD; k++) begin
        checks++;
        if (rdata[k] !== model[raddr[k]]) begin failures++; if (failures < 10) $display("FAIL port %0d", k); end
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
