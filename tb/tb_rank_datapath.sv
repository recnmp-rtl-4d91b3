// tb_rank_datapath -- self-checking test of the rank-NMP SLS datapath.
//
// Several packets are run. Each packet clears the partial sums, picks a
// vector length, and streams random rows with random PsumTags through every
// operation: sum, mean, weighted sum and the 8-bit row-wise quantised
// weighted sum (scale and bias carried in the row). A reference in real
// arithmetic accumulates w * (s * x + b) per tag and element; afterwards every
// word of the Psum.RegFile is read back and compared, including the lanes
// beyond the vector length, which must stay zero. The latency from accepting
// a row to its row_done is checked against the pipeline depth: the w*s
// multiply (4), one cycle per further chunk, then multiply (4), bias add (3)
// and accumulate (3), plus the hand-over and write-back registers.
module tb_rank_datapath;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                        clear = 0, start_valid = 0, start_ready, row_done;
  nmp_op_e                     op;
  logic [31:0]                 weight;
  logic [TAG_W-1:0]            tag, rd_tag;
  logic [VLEN_W-1:0]           vlen;
  logic [MAX_VSIZE*LINE_W-1:0] row;
  logic [CHUNK_W-1:0]          rd_chunk;
  lane_vec_t                   rd_data;

  rank_datapath dut (.*);

  real ref_ps [NUM_TAGS][MAX_ELEMS];
  int  n_op [6];

  // extra cycles besides w*s (4) and the chunk pipeline (4 + 3 + 3)
  localparam int LAT_EXTRA = 3;

  initial begin
    #20000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_row();
    real w, s, b, x;
    int  lat;
    nmp_op_e o;
    o = nmp_op_e'($urandom_range(0, 5));
    n_op[o]++;
    op  = o;
    tag = TAG_W'($urandom_range(0, NUM_TAGS - 1));
    w   = real'(int'($urandom_range(0, 16)) - 8) / 4.0;
    weight = r2fp(w);
    if (o == OP_SUM) w = 1.0;
    row = '0;
    if (is_8bit(o)) begin
      s = real'(int'($urandom_range(1, 32))) / 16.0;
      b = real'(int'($urandom_range(0, 16)) - 8) / 8.0;
      row[31:0]  = r2fp(s);
      row[63:32] = r2fp(b);
      for (int i = 0; i < MAX_ELEMS; i++) begin
        logic [7:0] q;
        q = 8'($urandom_range(0, 255));
        row[(8 + i) * 8 +: 8] = q;
        if (i < int'(vlen)) ref_ps[tag][i] += w * (s * real'($signed(q)) + b);
      end
    end else begin
      for (int i = 0; i < MAX_ELEMS; i++) begin
        x = real'(int'($urandom_range(0, 200)) - 100) / 8.0;
        row[i*32 +: 32] = r2fp(x);
        if (i < int'(vlen)) ref_ps[tag][i] += w * x;
      end
    end
    start_valid = 1;
    #1;
    while (!start_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    start_valid = 0;
    lat = 0;
    while (!row_done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != FP_MUL_LAT + (int'(vlen) + LANES - 1) / LANES - 1 + FP_MUL_LAT + 2 * FP_ADD_LAT + LAT_EXTRA) begin
      failures++; $display("FAIL row latency %0d for vlen %0d", lat, vlen);
    end
  endtask

  task automatic check_all();
    for (int t = 0; t < NUM_TAGS; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        rd_tag = TAG_W'(t); rd_chunk = CHUNK_W'(c);
        @(negedge clk);
        for (int l = 0; l < LANES; l++) begin
          real e;
          int  i;
          i = c * LANES + l;
          e = (i < int'(vlen)) ? ref_ps[t][i] : 0.0;
          checks++;
          if (!close(rd_data[l*32 +: 32], e, 1e-5)) begin
            failures++;
            $display("FAIL psum tag %0d elem %0d got %g exp %g", t, i, fp2r(rd_data[l*32 +: 32]), e);
          end
        end
      end
  endtask

  initial begin
    op = OP_SUM; weight = '0; tag = '0; vlen = VLEN_W'(MAX_ELEMS); row = '0;
    rd_tag = '0; rd_chunk = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    for (int p = 0; p < 6; p++) begin
      vlen = (p == 0) ? VLEN_W'(MAX_ELEMS) : VLEN_W'($urandom_range(1, MAX_ELEMS));
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (ref_ps[t, i]) ref_ps[t][i] = 0.0;
      for (int n = 0; n < 40; n++) one_row();
      check_all();
    end
    checks++;
    foreach (n_op[o]) if (n_op[o] == 0) begin failures++; $display("FAIL op %0d never used", o); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
