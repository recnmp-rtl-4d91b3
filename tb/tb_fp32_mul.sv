// tb_fp32_mul -- self-checking test of the pipelined FP32 multiplier.
//
// Streams random operand pairs (one per cycle) plus hand-picked cases (zero
// operands, exact cancellation, very different exponents, rounding carry) and
// compares each result with the product computed in double precision from the
// operands' bit patterns, allowing one FP32 rounding (relative 2^-23). It
// also checks that a single operand pair appears exactly 4 cycles later.
module tb_fp32_mul;
  import recnmp_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0;
  logic [31:0] a = 0, b = 0;
  logic        out_valid;
  logic [31:0] y;
  int checks = 0, failures = 0;

  fp32_mul dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  real exp_q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    real e;
    e = exp_q.pop_front();
    checks++;
    if (!close(y, e, 1.2e-7)) begin
      failures++;
      $display("FAIL mul: got %h (%g) exp %g", y, fp2r(y), e);
    end
  end

  task automatic push(logic [31:0] x0, logic [31:0] x1);
    a <= x0; b <= x1; in_valid <= 1;
    exp_q.push_back(fp2r(x0) * fp2r(x1));
    @(posedge clk);
    in_valid <= 0;
  endtask

  function automatic logic [31:0] rnd_fp();
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(100 + $urandom_range(0, 50));   // normal, moderate range
    return v;
  endfunction

  initial begin
    #2000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // latency: one pair, count cycles to out_valid
    a <= r2fp(1.5); b <= r2fp(2.25); in_valid <= 1;
    exp_q.push_back(3.375);
    @(posedge clk);
    in_valid <= 0;
    lat = 0;
    do begin @(negedge clk); lat++; end while (!out_valid && lat < 20);
    checks++;
    if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
    @(posedge clk);
    // directed cases
    push(32'h0, 32'h0);
    push(r2fp(3.0), 32'h0);
    push(32'h0, r2fp(-7.0));
    push(r2fp(5.5), r2fp(-5.5));
    push(r2fp(1.0), r2fp(1.0e-10));
    push(r2fp(1.0), r2fp(-0.99999994));
    push(32'h3fff_ffff, 32'h3400_0000);           // rounding carry
    push(r2fp(-2.5), r2fp(-1.25));
    push(r2fp(1.0e18), r2fp(-3.0e-18));
    // random stream, signs mixed
    for (int i = 0; i < 2000; i++) begin
      a <= rnd_fp(); b <= rnd_fp(); in_valid <= 1;
      #0;
      @(negedge clk);
      exp_q.push_back(fp2r(a) * fp2r(b));
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
