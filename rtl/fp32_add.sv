// fp32_add -- pipelined IEEE-754 single-precision adder.
//
// Computes y = a + b. The sum is formed in one combinational step (align the
// smaller operand with guard/round/sticky bits, add or subtract magnitudes,
// normalise, round to nearest-even) and then travels through LAT register
// stages, so a result appears LAT cycles after its operands and a new pair
// can enter every cycle. The three-cycle latency is the figure published for
// the FP32 adder of this design; how the logic is split over the stages is
// left to retiming in synthesis.
//
// Simplifications (this design's choice): subnormal inputs are read as zero
// and subnormal results are flushed to zero; an infinite or NaN operand is
// passed through unchanged (a NaN result is not generated for inf - inf).
//
// Interface: in_valid/a/b enter at a clock edge; out_valid/y are valid LAT
// cycles later. Reset clears only the valid pipeline.
module fp32_add #(
  parameter int LAT = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);

  function automatic logic [31:0] add_core(logic [31:0] x0, logic [31:0] x1);
    logic [31:0] p, q;
    logic        sp, sq;
    logic [7:0]  ep, eq;
    logic [26:0] mp, mq;          // 1.23 mantissa plus guard, round, sticky
    logic [7:0]  d;
    logic [27:0] s;
    logic [9:0]  e;
    int          lz;
    logic [23:0] m;
    logic        g, r, st, up;
    // order by magnitude so that p >= q
    if (x0[30:0] >= x1[30:0]) begin p = x0; q = x1; end
    else                      begin p = x1; q = x0; end
    sp = p[31]; ep = p[30:23];
    sq = q[31]; eq = q[30:23];
    if (ep == 8'hff) return p;                 // inf / NaN
    if (ep == 8'h00) return 32'h0;             // both zero (or subnormal)
    if (eq == 8'h00) return p;                 // q is zero
    mp = {1'b1, p[22:0], 3'b000};
    mq = {1'b1, q[22:0], 3'b000};
    d  = ep - eq;
    if (d > 8'd26) mq = 27'd1;                 // only sticky survives
    else begin
      logic [26:0] sh;
      logic        lost;
      sh   = mq >> d;
      lost = |(mq & ~(27'h7ff_ffff << d));
      mq   = sh | {26'd0, lost};
    end
    e = {2'b00, ep};
    if (sp == sq) begin
      s = {1'b0, mp} + {1'b0, mq};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 10'd1;
      end
    end else begin
      s = {1'b0, mp} - {1'b0, mq};
      if (s == 28'd0) return 32'h0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - 10'(lz);
    end
    // s[26:3] = 1.23 mantissa, s[2] guard, s[1] round, s[0] sticky
    m  = s[26:3];
    g  = s[2]; r = s[1]; st = s[0];
    up = g & (r | st | m[0]);
    if (up) begin
      if (m == 24'hff_ffff) begin
        m = 24'h80_0000;
        e = e + 10'd1;
      end else m = m + 24'd1;
    end
    if ($signed(e) <= 0 || e[9]) return {sp, 31'd0};      // underflow
    if (e >= 10'd255) return {sp, 8'hff, 23'd0};          // overflow
    return {sp, e[7:0], m[22:0]};
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
    pipe_y[0] <= add_core(a, b);
    for (int i = 1; i < LAT; i++) pipe_y[i] <= pipe_y[i-1];
  end

  assign out_valid = pipe_v[LAT-1];
  assign y         = pipe_y[LAT-1];

endmodule
