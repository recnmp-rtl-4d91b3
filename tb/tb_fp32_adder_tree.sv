// tb_fp32_adder_tree -- self-checking test of the element-wise adder tree.
//
// Two trees are tested: the default two-input tree (one rank pair) and a
// five-input tree (three levels, padded with zeros). Random vectors of
// exactly representable values enter every cycle; each lane of each output
// must equal the sum computed in real arithmetic, and a single input set
// must appear after levels x 3 cycles.
module tb_fp32_adder_tree;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      v_in = 0;
  lane_vec_t in2 [2];
  lane_vec_t in5 [5];
  logic      v2, v5;
  lane_vec_t y2, y5;

  fp32_adder_tree                 dut2 (.clk, .rst_n, .in_valid(v_in), .in_vec(in2), .out_valid(v2), .out_vec(y2));
  fp32_adder_tree #(.N_IN(5))     dut5 (.clk, .rst_n, .in_valid(v_in), .in_vec(in5), .out_valid(v5), .out_vec(y5));

  real q2 [$];
  real q5 [$];

  always @(posedge clk) if (rst_n) begin
    if (v2) for (int l = 0; l < LANES; l++) begin
      real e; e = q2.pop_front(); checks++;
      if (!close(y2[l*32 +: 32], e, 0.0)) begin failures++; $display("FAIL tree2 lane %0d got %g exp %g", l, fp2r(y2[l*32 +: 32]), e); end
    end
    if (v5) for (int l = 0; l < LANES; l++) begin
      real e; e = q5.pop_front(); checks++;
      if (!close(y5[l*32 +: 32], e, 0.0)) begin failures++; $display("FAIL tree5 lane %0d got %g exp %g", l, fp2r(y5[l*32 +: 32]), e); end
    end
  end

  task automatic drive_random();
    for (int l = 0; l < LANES; l++) begin
      real s2, s5, v;
      s2 = 0.0; s5 = 0.0;
      for (int i = 0; i < 5; i++) begin
        v = real'(int'($urandom_range(0, 2000)) - 1000) / 16.0;
        in5[i][l*32 +: 32] = r2fp(v);
        s5 += v;
        if (i < 2) begin in2[i][l*32 +: 32] = r2fp(v); s2 += v; end
      end
      q2.push_back(s2);
      q5.push_back(s5);
    end
  endtask

  initial begin
    #200000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    in2 = '{default: '0};
    in5 = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // latency of a single set: 1 level (3 cycles) and 3 levels (9 cycles)
    drive_random();
    v_in = 1;
    @(negedge clk);
    v_in = 0;
    lat = 1;
    while (!v2) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL 2-input latency %0d", lat); end
    while (!v5) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 9) begin failures++; $display("FAIL 5-input latency %0d", lat); end
    repeat (3) @(negedge clk);
    // streaming
    for (int n = 0; n < 300; n++) begin
      drive_random();
      v_in = 1;
      @(negedge clk);
    end
    v_in = 0;
    repeat (15) @(negedge clk);
    checks++;
    if (q2.size() != 0 || q5.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
