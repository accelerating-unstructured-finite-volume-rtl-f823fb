// tb_memory_unit: writes random node words through port A at random
// addresses, reads them back on both ports against a model, checks the
// one-cycle read latency and read-before-write on port A, and checks that a
// disabled port holds its output.
module tb_memory_unit;
  localparam int W = 40, DEPTH = 100;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0;
  logic en_a = 1'b0, we_a = 1'b0, en_b = 1'b0;
  logic [AW-1:0] addr_a = '0, addr_b = '0;
  logic [W-1:0] din_a = '0, dout_a, dout_b;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  memory_unit #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every address
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en_a = 1'b1; we_a = 1'b1; addr_a = AW'(i); din_a = {$urandom, 8'($urandom)};
      model[i] = din_a;
    end
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] exp_a, exp_b;
      logic wa, ea, eb;
      @(negedge clk);
      ea = $urandom_range(3) != 0;
      eb = $urandom_range(3) != 0;
      wa = ea && $urandom_range(1) == 0;
      en_a = ea; we_a = wa; en_b = eb;
      addr_a = AW'($urandom_range(DEPTH - 1));
      addr_b = AW'($urandom_range(DEPTH - 1));
      din_a  = {$urandom, 8'($urandom)};
      exp_a = ea ? model[addr_a] : dout_a;   // old word on a write
      exp_b = eb ? model[addr_b] : dout_b;
      if (wa) model[addr_a] = din_a;
      if (eb && wa && addr_b == addr_a) exp_b = dout_b;  // same-cycle cross-port: not checked
      @(posedge clk); #1;
      checks++;
      if (dout_a !== exp_a) begin failures++; if (failures < 10) $display("FAIL A n=%0d", n); end
      if (!(eb && wa && addr_b == addr_a)) begin
        checks++;
        if (dout_b !== exp_b) begin failures++; if (failures < 10) $display("FAIL B n=%0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
