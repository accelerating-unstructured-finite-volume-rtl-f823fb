// tb_fp_unit: checks each fp_unit operator against the simulator's own
// double-precision arithmetic on random normal operands. Results must match
// bit for bit (both round to nearest even). The output latency (LAT) is
// checked as well.
module tb_fp_unit;
  import fp_pkg::*;

  localparam int unsigned LAT = 2;
  localparam int NOPS = 6;
  localparam int NVEC = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic in_valid = 1'b0;
  fp_t  a = '0, b = '0;
  logic ov [NOPS];
  fp_t  y  [NOPS];
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_unit #(.OP(FP_ADD),  .LAT(LAT)) u_add  (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[0]), .y(y[0]));
  fp_unit #(.OP(FP_SUB),  .LAT(LAT)) u_sub  (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[1]), .y(y[1]));
  fp_unit #(.OP(FP_MUL),  .LAT(LAT)) u_mul  (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[2]), .y(y[2]));
  fp_unit #(.OP(FP_DIV),  .LAT(LAT)) u_div  (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[3]), .y(y[3]));
  fp_unit #(.OP(FP_SQRT), .LAT(LAT)) u_sqrt (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[4]), .y(y[4]));
  fp_unit #(.OP(FP_HALF), .LAT(LAT)) u_half (.clk, .rst_n, .in_valid, .a, .b, .out_valid(ov[5]), .y(y[5]));

  function automatic fp_t rnd_fp(input int span);
    logic [63:0] v;
    int e;
    e = 1023 + int'($urandom_range(2 * span)) - span;
    v = {$urandom, $urandom};
    v[62:52] = e[10:0];
    return v;
  endfunction

  function automatic fp_t ref_op(input int k, input fp_t x, input fp_t z);
    real rx, rz;
    rx = $bitstoreal(x);
    rz = $bitstoreal(z);
    case (k)
      0: return $realtobits(rx + rz);
      1: return $realtobits(rx - rz);
      2: return $realtobits(rx * rz);
      3: return $realtobits(rx / rz);
      4: return $realtobits($sqrt(rx < 0.0 ? -rx : rx));
      default: return $realtobits(rx / 2.0);
    endcase
  endfunction

  task automatic check_vec(input fp_t x, input fp_t z);
    fp_t exp_y [NOPS];
    a = x; b = z; in_valid = 1'b1;
    for (int k = 0; k < NOPS; k++) exp_y[k] = ref_op(k, x, (k == 4) ? z : z);
    @(posedge clk); #1;
    in_valid = 1'b0;
    a = {x[63], ~x[62:0]};  // disturb inputs: outputs must not follow them
    for (int c = 1; c < LAT; c++) begin
      checks++;
      if (ov[0]) begin failures++; $display("FAIL valid early at cycle %0d", c); end
      @(posedge clk); #1;
    end
    for (int k = 0; k < NOPS; k++) begin
      fp_t e;
      e = exp_y[k];
      if (k == 4 && x[63]) e = FP_ZERO;   // sqrt of a negative: unit returns 0
      checks++;
      if (!ov[k] || y[k] !== e) begin
        failures++;
        if (failures < 20)
          $display("FAIL op%0d a=%h b=%h got=%h exp=%h v=%b", k, x, z, y[k], e, ov[k]);
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // directed cases: cancellation, equal exponents, exact halves, unit values
    check_vec(64'h3FF0000000000000, 64'h3FF0000000000000);
    check_vec(64'h3FF0000000000001, 64'h3FF0000000000000);
    check_vec(64'h4000000000000000, 64'hBFF0000000000000);
    check_vec(64'h3FF8000000000000, 64'h3CA0000000000000);
    check_vec(64'h4010000000000000, 64'h3FE0000000000000);
    check_vec(FP_GAMMA, FP_GAMMA_M1);
    for (int n = 0; n < NVEC; n++) begin
      fp_t x, z;
      x = rnd_fp(n % 3 == 0 ? 2 : 40);
      z = rnd_fp(n % 3 == 0 ? 2 : 40);
      if (n % 7 == 0) z = {~x[63], x[62:52], x[51:0] ^ 52'($urandom_range(15))};  // near cancellation
      check_vec(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
