// tb_rank_nmp -- self-checking test of one rank-NMP with its DRAM rank.
//
// The testbench acts as the DIMM-NMP and the host memory controller for a
// single rank: it sets the vector length and the expected instruction count,
// streams NMP-Insts with {PRE, ACT, RD} tags derived from its own open-row
// table, waits for done and reads every partial sum through the Rank.Psum
// port, comparing with a real-arithmetic reference. Hot vectors (LocalityBit
// 1) must hit in the RankCache after their first use, cold ones miss or
// bypass. Checked besides the sums: the hit/miss/bypass counters, that the
// DRAM saw exactly one RD per burst of every missed or bypassed vector and
// none for hits, no DDR4 protocol breach, and that done stays low until the
// last instruction has been accumulated.
module tb_rank_nmp;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               inst_valid = 0, inst_ready;
  nmp_inst_t          inst;
  logic               cfg_cnt_wr = 0, cfg_vlen_wr = 0, done;
  logic [15:0]        cfg_cnt;
  logic [VLEN_W-1:0]  cfg_vlen;
  logic [TAG_W-1:0]   psum_rd_tag;
  logic [CHUNK_W-1:0] psum_rd_chunk;
  lane_vec_t          psum_rd_data;
  ddr_ca_t            ddr_ca;
  logic               ddr_dq_valid;
  logic [DQ_W-1:0]    ddr_dq;
  logic [31:0]        n_hit, n_miss, n_bypass;

  rank_nmp dut (.*);
  ddr4_rank_model #(.RANK_ID(2'd0)) u_dram (.clk, .reset_n(rst_n), .ca(ddr_ca), .dq_valid(ddr_dq_valid), .dq(ddr_dq));

  bit          open_b [16];
  logic [15:0] row_b  [16];
  real         ref_ps [NUM_TAGS][MAX_ELEMS];
  int          vlen;
  bit          cached [logic [28:0]];
  int          e_hit = 0, e_miss = 0, e_bypass = 0, e_rd = 0, e_hit_tags = 0;

  function automatic int lines_for(nmp_op_e op);
    return ((is_8bit(op) ? 8 + vlen : 4 * vlen) + 63) / 64;
  endfunction

  task automatic send(bit hot, int hot_idx);
    nmp_inst_t in;
    logic [MAX_VSIZE*512-1:0] row;
    int  b, nl;
    bit  all_cached;
    real w, s, bb;
    in = '0;
    in.op = nmp_op_e'($urandom_range(0, 5));
    nl = lines_for(in.op);
    if (hot) begin
      in.daddr.bg = 2'(hot_idx % 4); in.daddr.ba = 2'(hot_idx / 4);
      in.daddr.row = 16'(hot_idx % 2); in.daddr.col = 10'(64 * hot_idx);
      in.locality = 1'b1;
    end else begin
      in.daddr.bg = 2'($urandom_range(0, 3)); in.daddr.ba = 2'($urandom_range(0, 3));
      in.daddr.row = 16'($urandom_range(0, 2)); in.daddr.col = 10'(8 * $urandom_range(0, 120));
      in.locality = 1'($urandom_range(0, 1));
    end
    in.vsize = 3'(nl);
    in.weight = r2fp(real'(int'($urandom_range(0, 16)) - 8) / 4.0);
    in.psum_tag = TAG_W'($urandom_range(0, NUM_TAGS - 1));
    b = {in.daddr.bg, in.daddr.ba};
    in.ddr_cmd.rd = 1'b1;
    if (!open_b[b]) in.ddr_cmd.act = 1'b1;
    else if (row_b[b] != in.daddr.row) begin in.ddr_cmd.pre = 1'b1; in.ddr_cmd.act = 1'b1; end
    open_b[b] = 1'b1; row_b[b] = in.daddr.row;
    all_cached = 1'b1;
    for (int i = 0; i < nl; i++) if (!cached.exists(in.daddr[31:3] + 29'(i))) all_cached = 1'b0;
    if (!in.locality) begin e_bypass++; e_rd += nl; end
    else if (all_cached) begin e_hit++; if (in.ddr_cmd.act) e_hit_tags++; end
    else begin
      e_miss++; e_rd += nl;
      for (int i = 0; i < nl; i++) cached[in.daddr[31:3] + 29'(i)] = 1'b1;
    end
    // reference
    row = '0;
    for (int i = 0; i < nl; i++) row[i*512 +: 512] = emb_line(in.daddr[31:3] + 29'(i));
    w = (in.op == OP_SUM) ? 1.0 : fp2r(in.weight);
    s = is_8bit(in.op) ? fp2r(row[31:0]) : 1.0;
    bb = is_8bit(in.op) ? fp2r(row[63:32]) : 0.0;
    for (int i = 0; i < vlen; i++)
      ref_ps[in.psum_tag][i] += w * (s * (is_8bit(in.op) ? real'($signed(row[(8 + i) * 8 +: 8]))
                                                          : fp2r(row[i*32 +: 32])) + bb);
    inst = in;
    inst_valid = 1;
    #1;
    while (!inst_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic run_packet(int vl, int n);
    int lat;
    vlen = vl;
    foreach (ref_ps[t, i]) ref_ps[t][i] = 0.0;
    cfg_vlen_wr = 1; cfg_vlen = VLEN_W'(vl);
    @(negedge clk);
    cfg_vlen_wr = 0;
    cfg_cnt_wr = 1; cfg_cnt = 16'(n);
    @(negedge clk);
    cfg_cnt_wr = 0;
    checks++;
    if (done) begin failures++; $display("FAIL done before any instruction"); end
    for (int k = 0; k < n; k++) send($urandom_range(0, 1) == 1, $urandom_range(0, 7));
    lat = 0;
    while (!done && lat < 100000) begin @(negedge clk); lat++; end
    checks++;
    if (!done) begin failures++; $display("FAIL done never rose"); return; end
    for (int t = 0; t < NUM_TAGS; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        psum_rd_tag = TAG_W'(t); psum_rd_chunk = CHUNK_W'(c);
        @(negedge clk);
        for (int l = 0; l < LANES; l++) begin
          int i;
          real e;
          i = c * LANES + l;
          e = (i < vlen) ? ref_ps[t][i] : 0.0;
          checks++;
          if (!close(psum_rd_data[l*32 +: 32], e, 1e-4)) begin
            failures++;
            $display("FAIL psum tag %0d elem %0d got %g exp %g", t, i, fp2r(psum_rd_data[l*32 +: 32]), e);
          end
        end
      end
  endtask

  initial begin
    #20000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inst = '0; cfg_cnt = '0; cfg_vlen = '0; psum_rd_tag = '0; psum_rd_chunk = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    run_packet(MAX_ELEMS, 120);
    run_packet(20, 100);
    run_packet(37, 100);
    repeat (50) @(negedge clk);
    checks += 5;
    if (n_hit != 32'(e_hit))       begin failures++; $display("FAIL hits %0d exp %0d", n_hit, e_hit); end
    if (n_miss != 32'(e_miss))     begin failures++; $display("FAIL misses %0d exp %0d", n_miss, e_miss); end
    if (n_bypass != 32'(e_bypass)) begin failures++; $display("FAIL bypasses %0d exp %0d", n_bypass, e_bypass); end
    if (u_dram.n_rd != e_rd)       begin failures++; $display("FAIL DRAM reads %0d exp %0d", u_dram.n_rd, e_rd); end
    if (u_dram.violations != 0)    begin failures++; $display("FAIL %0d DDR4 violations", u_dram.violations); end
    checks++;
    if (e_hit == 0 || e_miss == 0 || e_bypass == 0 || e_hit_tags == 0) begin
      failures++; $display("FAIL a fetch path was not exercised");
    end
    $display("hit %0d (with PRE/ACT %0d) miss %0d bypass %0d reads %0d", e_hit, e_hit_tags, e_miss, e_bypass, e_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
