// tb_dimm_nmp -- self-checking test of the DIMM-NMP module.
//
// The rank-NMPs are replaced by testbench stubs: each accepts instructions
// with a random ready, records them, reports done once it has received the
// count the host wrote into its counter register, and answers partial-sum
// reads one cycle later with a known pattern. Checked: every instruction
// reaches exactly the rank named by its Rank-ID, in order; the Inst Queue
// pushes back on the host while the ranks stall; the register writes reach
// the ranks; DIMM.Sum equals the element-wise sum of the ranks' partial sums
// for every PsumTag and chunk; and sum_valid rises a fixed number of cycles
// after the last rank reports done (one psum word per cycle for
// NUM_TAGS x CHUNKS words, plus the read, buffer and adder-tree stages).
module tb_dimm_nmp;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  localparam int NR = 2;
  localparam int WORDS = NUM_TAGS * CHUNKS;
  // start (1) + one word per cycle + read and buffer (2) + tree + sum_valid (1)
  localparam int RED_LAT = 1 + WORDS + 2 + FP_ADD_LAT + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_bp = 0;

  logic               host_inst_valid = 0, host_inst_ready;
  nmp_inst_t          host_inst;
  logic               reg_wr = 0;
  logic [7:0]         reg_addr;
  logic [31:0]        reg_wdata;
  logic               sum_valid;
  logic [TAG_W-1:0]   sum_rd_tag;
  logic [CHUNK_W-1:0] sum_rd_chunk;
  lane_vec_t          sum_rd_data;
  logic               rank_inst_valid [NR];
  logic               rank_inst_ready [NR];
  nmp_inst_t          rank_inst;
  logic               rank_cnt_wr [NR];
  logic [15:0]        rank_cnt;
  logic               rank_vlen_wr;
  logic [VLEN_W-1:0]  rank_vlen;
  logic               rank_done [NR];
  logic [TAG_W-1:0]   psum_rd_tag;
  logic [CHUNK_W-1:0] psum_rd_chunk;
  lane_vec_t          rank_psum [NR];

  dimm_nmp dut (.*);

  // pattern held in rank r's partial sums
  function automatic real pat(int r, int t, int c, int l);
    return real'((r + 1) * (t * 37 + c * 5 + l) % 301 - 150) / 4.0;
  endfunction

  nmp_inst_t exp_q [NR][$];
  int        target [NR], got [NR];
  int        pkt = 0, stall = 0;

  // rank stubs
  always @(posedge clk) begin
    for (int r = 0; r < NR; r++) begin
      if (rank_inst_valid[r] && rank_inst_ready[r]) begin
        nmp_inst_t e;
        checks++;
        if (exp_q[r].size() == 0) begin failures++; $display("FAIL rank %0d got an unexpected instruction", r); end
        else begin
          e = exp_q[r].pop_front();
          if (e != rank_inst) begin failures++; $display("FAIL rank %0d got a wrong instruction", r); end
        end
        got[r]++;
      end
      if (rank_cnt_wr[r]) begin target[r] = int'(rank_cnt); got[r] = 0; end
      for (int l = 0; l < LANES; l++)
        rank_psum[r][l*32 +: 32] <= r2fp(pat(r, psum_rd_tag, psum_rd_chunk, l) + real'(pkt));
      rank_inst_ready[r] <= ($urandom_range(0, 3) != 0) && (stall == 0);
    end
    if (rst_n && host_inst_valid && !host_inst_ready) n_bp++;
    if (stall > 0) stall--;
  end
  always_comb for (int r = 0; r < NR; r++) rank_done[r] = (got[r] == target[r]);

  initial begin
    #20000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr_reg(logic [7:0] a, logic [31:0] d);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    #1;
    if (a == 8'h10) begin
      checks++;
      if (!rank_vlen_wr || rank_vlen != VLEN_W'(d)) begin failures++; $display("FAIL vlen write"); end
    end
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic packet(int n0, int n1);
    int n [NR];
    int lat;
    n = '{n0, n1};
    wr_reg(8'h10, 32'(MAX_ELEMS));
    for (int r = 0; r < NR; r++) wr_reg(8'(r), 32'(n[r]));
    checks++;
    if (sum_valid) begin failures++; $display("FAIL sum_valid not dropped by a new count"); end
    begin
      int order [$];
      for (int r = 0; r < NR; r++) repeat (n[r]) order.push_back(r);
      order.shuffle();
      foreach (order[k]) begin
        nmp_inst_t in;
        in = '0;
        in.daddr.rank = 2'(order[k]);
        in.daddr.row  = 16'($urandom);
        in.weight     = $urandom;
        in.psum_tag   = TAG_W'($urandom);
        exp_q[order[k]].push_back(in);
        host_inst = in;
        host_inst_valid = 1;
        #1;
        while (!host_inst_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        host_inst_valid = 0;
      end
    end
    while (!(rank_done[0] && rank_done[1])) @(negedge clk);
    lat = 0;
    while (!sum_valid && lat < 2000) begin @(negedge clk); lat++; end
    checks++;
    if (lat != RED_LAT) begin failures++; $display("FAIL reduction took %0d cycles, expected %0d", lat, RED_LAT); end
    for (int t = 0; t < NUM_TAGS; t++)
      for (int c = 0; c < CHUNKS; c++) begin
        sum_rd_tag = TAG_W'(t); sum_rd_chunk = CHUNK_W'(c);
        @(negedge clk);
        for (int l = 0; l < LANES; l++) begin
          real e;
          e = 0.0;
          for (int r = 0; r < NR; r++) e += pat(r, t, c, l) + real'(pkt);
          checks++;
          if (!close(sum_rd_data[l*32 +: 32], e, 0.0)) begin
            failures++; $display("FAIL sum tag %0d chunk %0d lane %0d got %g exp %g", t, c, l, fp2r(sum_rd_data[l*32 +: 32]), e);
          end
        end
      end
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (exp_q[r].size() != 0) begin failures++; $display("FAIL rank %0d missed instructions", r); end
    end
    pkt++;
  endtask

  initial begin
    host_inst = '0; reg_addr = '0; reg_wdata = '0; sum_rd_tag = '0; sum_rd_chunk = '0;
    target = '{default: 0}; got = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    stall = 100;          // ranks stall at first: the Inst Queue fills up
    packet(40, 35);
    packet(10, 60);
    packet(25, 1);
    checks++;
    if (n_bp == 0) begin failures++; $display("FAIL the Inst Queue never pushed back"); end
    $display("back-pressure cycles %0d", n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
