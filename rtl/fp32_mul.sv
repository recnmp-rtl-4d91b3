// fp32_mul -- pipelined IEEE-754 single-precision multiplier.
//
// Computes y = a * b: 24x24-bit mantissa product, exponent sum, one-bit
// normalisation and round to nearest-even, formed combinationally and then
// carried through LAT register stages (a new operand pair every cycle, result
// LAT cycles later). The four-cycle latency is the published figure for the
// FP32 multiplier of this design; the stage split is left to retiming.
//
// Simplifications (this design's choice): subnormal operands are read as zero,
// subnormal results flush to zero, infinities and NaNs give a signed infinity
// (0 * inf gives zero).
//
// Interface: in_valid/a/b in, out_valid/y LAT cycles later. Reset clears only
// the valid pipeline.
module fp32_mul #(
  parameter int LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);

  function automatic logic [31:0] mul_core(logic [31:0] x0, logic [31:0] x1);
    logic        s;
    logic [9:0]  e;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st, up;
    s = x0[31] ^ x1[31];
    if (x0[30:23] == 8'h00 || x1[30:23] == 8'h00) return {s, 31'd0};
    if (x0[30:23] == 8'hff || x1[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    p = {1'b1, x0[22:0]} * {1'b1, x1[22:0]};
    e = {2'b00, x0[30:23]} + {2'b00, x1[30:23]} - 10'd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 10'd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    up = g & (st | m[0]);
    if (up) begin
      if (m == 24'hff_ffff) begin
        m = 24'h80_0000;
        e = e + 10'd1;
      end else m = m + 24'd1;
    end
    if ($signed(e) <= 0 || e[9]) return {s, 31'd0};
    if (e >= 10'd255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  logic [31:0] pipe_y [LAT];
  logic        pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      pipe_v[0] <= in_valid;
      for (int i = 1; i < LAT; i++) pipe_v[i] <= pipe_v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    pipe_y[0] <= mul_core(a, b);
    for (int i = 1; i < LAT; i++) pipe_y[i] <= pipe_y[i-1];
  end

  assign out_valid = pipe_v[LAT-1];
  assign y         = pipe_y[LAT-1];

endmodule
