// tb_sync_fifo: pushes and pops random words with random valid/ready and
// checks order, the full/empty flags, the fill count and the
// first-word-fall-through timing against a queue model.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int fulls = 0;

  always #5 clk = ~clk;
  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // compare outputs with the model before the edge
      checks++;
      if (out_valid != (model.size() > 0) || in_ready != (model.size() < DEPTH) ||
          int'(count) != model.size() || (model.size() > 0 && out_data != model[0])) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d size=%0d count=%0d ov=%b ir=%b", n, model.size(), count, out_valid, in_ready);
      end
      if (model.size() == DEPTH) fulls++;
      in_valid  = ($urandom_range(99) < ((n / 1000) % 2 == 0 ? 70 : 30));
      out_ready = ($urandom_range(99) < ((n / 1000) % 2 == 0 ? 30 : 70));
      in_data   = W'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
