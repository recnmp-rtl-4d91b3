// tb_recnmp_pu -- end-to-end test of the processing unit at its default size.
//
// Two ranks (each a DDR4 rank model behind the unit's C/A and DQ ports),
// 128 KB RankCaches, 16 PsumTags. The testbench plays the host: for each
// packet it writes the vector-size register and the per-rank instruction
// counts, then streams NMP-Insts whose {PRE, ACT, RD} tags it derives from
// its own per-bank open-row table, exactly as a memory controller that
// schedules on behalf of the unit would. Vectors come from a small hot set
// (LocalityBit 1, so they are cached after first use) and from a cold pool
// (LocalityBit random, so both cache misses and bypasses occur). Operations
// cover sum, mean, weighted sum/mean and their 8-bit row-wise quantised
// forms. When the unit raises sum_valid the host reads DIMM.Sum for every
// PsumTag and element and compares it with a real-arithmetic reference.
//
// Each mechanism of the unit is counted and must occur at least once: both
// ranks busy, RankCache hit, miss and bypass, a hit that still had to send
// PRE/ACT, DRAM row hit, row miss and row conflict, 8-bit and FP32 rows,
// weighted operations, Inst Queue back-pressure on the host, and the final
// reduction. The DDR4 models must see no timing or state violation.
module tb_recnmp_pu;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  localparam int NR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               host_inst_valid = 0, host_inst_ready;
  nmp_inst_t          host_inst;
  logic               reg_wr = 0;
  logic [7:0]         reg_addr;
  logic [31:0]        reg_wdata;
  logic               sum_valid;
  logic [TAG_W-1:0]   sum_rd_tag;
  logic [CHUNK_W-1:0] sum_rd_chunk;
  lane_vec_t          sum_rd_data;
  ddr_ca_t            ddr_ca       [NR];
  logic               ddr_dq_valid [NR];
  logic [DQ_W-1:0]    ddr_dq       [NR];
  logic [31:0]        n_hit [NR], n_miss [NR], n_bypass [NR];

  recnmp_pu dut (.*);

  for (genvar r = 0; r < NR; r++) begin : g_dram
    ddr4_rank_model #(.RANK_ID(2'(r))) u_dram (
      .clk, .reset_n(rst_n), .ca(ddr_ca[r]), .dq_valid(ddr_dq_valid[r]), .dq(ddr_dq[r]));
  end

  // ------------------------------------------------ mechanism counters
  typedef enum int {M_RANK0, M_RANK1, M_HIT, M_MISS, M_BYPASS, M_HIT_TAGS,
                    M_ROW_HIT, M_ROW_MISS, M_ROW_CONFLICT, M_8BIT, M_FP32,
                    M_WEIGHTED, M_BACKPRESSURE, M_REDUCTION, M_COUNT} mech_e;
  int    mech [M_COUNT];
  string mech_name [M_COUNT] = '{"rank 0 used", "rank 1 used", "cache hit",
    "cache miss", "cache bypass", "cache hit with PRE/ACT", "DRAM row hit",
    "DRAM row miss", "DRAM row conflict", "8-bit row", "FP32 row",
    "weighted op", "Inst Queue back-pressure", "DIMM reduction"};

  always @(posedge clk)
    if (rst_n && host_inst_valid && !host_inst_ready) mech[M_BACKPRESSURE]++;

  // ------------------------------------------------ host model
  bit          open_b [NR][16];
  logic [15:0] row_b  [NR][16];
  real         ref_ps [NUM_TAGS][MAX_ELEMS];
  int          vlen;
  bit          cached [logic [28:0]];   // line address -> in RankCache

  // one vector's contribution, decoded exactly as the datapath does
  task automatic add_ref(nmp_inst_t in, int nl);
    logic [MAX_VSIZE*512-1:0] row;
    logic [28:0] base;
    real w, s, b;
    base = in.daddr[31:3];
    row  = '0;
    for (int i = 0; i < nl; i++) row[i*512 +: 512] = emb_line(base + 29'(i));
    w = (in.op == OP_SUM) ? 1.0 : fp2r(in.weight);
    if (is_8bit(in.op)) begin
      s = fp2r(row[31:0]);
      b = fp2r(row[63:32]);
    end else begin
      s = 1.0; b = 0.0;
    end
    for (int i = 0; i < vlen; i++) begin
      real x;
      x = is_8bit(in.op) ? real'($signed(row[(8 + i) * 8 +: 8])) : fp2r(row[i*32 +: 32]);
      ref_ps[in.psum_tag][i] += w * (s * x + b);
    end
  endtask

  function automatic int lines_for(nmp_op_e op);
    int bytes;
    bytes = is_8bit(op) ? 8 + vlen : 4 * vlen;
    return (bytes + 63) / 64;
  endfunction

  // build, account for and send one instruction
  task automatic send(int r, bit hot, int hot_idx);
    nmp_inst_t in;
    int  b, nl;
    bit  all_cached;
    in = '0;
    in.op = nmp_op_e'($urandom_range(0, 5));
    nl = lines_for(in.op);
    in.daddr.rank = 2'(r);
    if (hot) begin
      in.daddr.bg  = 2'(hot_idx % 4);
      in.daddr.ba  = 2'(hot_idx / 4);
      in.daddr.row = 16'(hot_idx % 3);
      in.daddr.col = 10'(64 * (hot_idx % 8));
      in.locality  = 1'b1;
    end else begin
      in.daddr.bg  = 2'($urandom_range(0, 3));
      in.daddr.ba  = 2'($urandom_range(0, 3));
      in.daddr.row = 16'($urandom_range(0, 5));
      in.daddr.col = 10'(8 * $urandom_range(0, 120));
      in.locality  = 1'($urandom_range(0, 1));
    end
    in.vsize    = 3'(nl);
    in.weight   = r2fp(real'(int'($urandom_range(0, 16)) - 8) / 4.0);
    in.psum_tag = TAG_W'($urandom_range(0, 9));
    b = {in.daddr.bg, in.daddr.ba};
    // DRAM tags from the open-row table
    in.ddr_cmd.rd = 1'b1;
    if (!open_b[r][b]) begin
      in.ddr_cmd.act = 1'b1; mech[M_ROW_MISS]++;
    end else if (row_b[r][b] != in.daddr.row) begin
      in.ddr_cmd.pre = 1'b1; in.ddr_cmd.act = 1'b1; mech[M_ROW_CONFLICT]++;
    end else mech[M_ROW_HIT]++;
    open_b[r][b] = 1'b1;
    row_b[r][b]  = in.daddr.row;
    // expected cache behaviour
    all_cached = 1'b1;
    for (int i = 0; i < nl; i++) if (!cached.exists(in.daddr[31:3] + 29'(i))) all_cached = 1'b0;
    if (!in.locality) mech[M_BYPASS]++;
    else if (all_cached) begin
      mech[M_HIT]++;
      if (in.ddr_cmd.act) mech[M_HIT_TAGS]++;
    end else begin
      mech[M_MISS]++;
      for (int i = 0; i < nl; i++) cached[in.daddr[31:3] + 29'(i)] = 1'b1;
    end
    mech[r == 0 ? M_RANK0 : M_RANK1]++;
    if (is_8bit(in.op)) mech[M_8BIT]++; else mech[M_FP32]++;
    if (in.op != OP_SUM) mech[M_WEIGHTED]++;
    add_ref(in, nl);
    host_inst = in;
    host_inst_valid = 1;
    #1;
    while (!host_inst_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_inst_valid = 0;
  endtask

  task automatic wr_reg(logic [7:0] a, logic [31:0] d);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic run_packet(int vl, int n_per_rank [NR]);
    int lat;
    vlen = vl;
    foreach (ref_ps[t, i]) ref_ps[t][i] = 0.0;
    wr_reg(8'h10, 32'(vl));
    for (int r = 0; r < NR; r++) wr_reg(8'(r), 32'(n_per_rank[r]));
    begin
      int order [$];
      for (int r = 0; r < NR; r++) repeat (n_per_rank[r]) order.push_back(r);
      order.shuffle();
      foreach (order[k]) send(order[k], $urandom_range(0, 1) == 1, $urandom_range(0, 11));
    end
    lat = 0;
    while (!sum_valid && lat < 200000) begin @(negedge clk); lat++; end
    checks++;
    if (!sum_valid) begin failures++; $display("FAIL sum_valid never rose"); return; end
    mech[M_REDUCTION]++;
    for (int t = 0; t < NUM_TAGS; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        sum_rd_tag = TAG_W'(t); sum_rd_chunk = CHUNK_W'(c);
        @(negedge clk);
        for (int l = 0; l < LANES; l++) begin
          int  i;
          real e;
          i = c * LANES + l;
          e = (i < vlen) ? ref_ps[t][i] : 0.0;
          checks++;
          if (!close(sum_rd_data[l*32 +: 32], e, 1e-4)) begin
            failures++;
            $display("FAIL DIMM.Sum tag %0d elem %0d got %g exp %g", t, i, fp2r(sum_rd_data[l*32 +: 32]), e);
          end
        end
      end
  endtask

  initial begin
    #50000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n [NR];
    host_inst = '0; reg_addr = '0; reg_wdata = '0; sum_rd_tag = '0; sum_rd_chunk = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    n = '{40, 36};
    run_packet(MAX_ELEMS, n);
    n = '{30, 34};
    run_packet(24, n);
    // DRAM protocol and cache counters
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (r == 0 && g_dram[0].u_dram.violations != 0 || r == 1 && g_dram[1].u_dram.violations != 0) begin
        failures++; $display("FAIL DDR4 violations on rank %0d", r);
      end
    end
    checks++;
    if (n_hit[0] + n_hit[1] != 32'(mech[M_HIT]) || n_miss[0] + n_miss[1] != 32'(mech[M_MISS]) ||
        n_bypass[0] + n_bypass[1] != 32'(mech[M_BYPASS])) begin
      failures++;
      $display("FAIL cache counters hit %0d/%0d miss %0d/%0d bypass %0d/%0d",
               n_hit[0] + n_hit[1], mech[M_HIT], n_miss[0] + n_miss[1], mech[M_MISS],
               n_bypass[0] + n_bypass[1], mech[M_BYPASS]);
    end
    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-26s %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mech_name[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
