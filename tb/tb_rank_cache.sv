// tb_rank_cache -- self-checking test of the RankCache.
//
// Runs a 1 KB, 4-way cache (4 sets) so that replacement happens often, and
// compares every lookup against a reference model: per set a list of resident
// line addresses in recency order (front = most recently used) and a map
// from line address to the data last filled. Random lookups and fills over a
// small address pool give a mix of hits, misses, refills and evictions. The
// response must come exactly one cycle after the lookup (the 1-cycle cache
// access), with the right hit flag and, on a hit, the right line.
module tb_rank_cache;
  localparam int CB = 1024, WAYS = 4, SETS = CB / (64 * WAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_hits = 0, n_evict = 0;

  logic         lookup_valid = 0, fill_valid = 0;
  logic [28:0]  lookup_addr = '0, fill_addr = '0;
  logic [511:0] fill_data = '0;
  logic         resp_valid, resp_hit;
  logic [511:0] resp_data;

  rank_cache #(.CACHE_BYTES(CB), .WAYS(WAYS)) dut (.*);

  // reference model
  logic [28:0]  lru  [SETS][$];
  logic [511:0] contents [logic [28:0]];

  function automatic int find(int s, logic [28:0] a);
    foreach (lru[s][i]) if (lru[s][i] == a) return i;
    return -1;
  endfunction

  function automatic logic [511:0] rnd_line();
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    #1000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      logic [28:0] a;
      int s, idx;
      bit exp_hit;
      a = 29'($urandom_range(0, 23)) | 29'h1000_0000 * 29'($urandom_range(0, 1));
      s = int'(a % SETS);
      idx = find(s, a);
      if ($urandom_range(0, 2) != 0) begin
        // lookup; the response is sampled one cycle later
        lookup_valid = 1; lookup_addr = a;
        exp_hit = (idx >= 0);
        if (exp_hit) begin
          lru[s].delete(idx);
          lru[s].push_front(a);
        end
        @(negedge clk);
        lookup_valid = 0;
        checks++;
        if (!resp_valid || resp_hit != exp_hit) begin
          failures++;
          $display("FAIL lookup %h: valid %0d hit %0d exp %0d", a, resp_valid, resp_hit, exp_hit);
        end else if (exp_hit) begin
          n_hits++;
          checks++;
          if (resp_data !== contents[a]) begin failures++; $display("FAIL data for %h", a); end
        end
      end else begin
        logic [511:0] d;
        d = rnd_line();
        fill_valid = 1; fill_addr = a; fill_data = d;
        if (idx >= 0) lru[s].delete(idx);
        else if (lru[s].size() == WAYS) begin
          void'(lru[s].pop_back());
          n_evict++;
        end
        lru[s].push_front(a);
        contents[a] = d;
        @(negedge clk);
        fill_valid = 0;
      end
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk);
        checks++;
        if (resp_valid) begin failures++; $display("FAIL response without lookup"); end
      end
    end
    checks++;
    if (n_hits < 100 || n_evict < 100) begin
      failures++; $display("FAIL too few hits (%0d) or evictions (%0d)", n_hits, n_evict);
    end
    $display("hits %0d evictions %0d", n_hits, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
