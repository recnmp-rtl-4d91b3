// rank_cache -- RankCache, the memory-side embedding-vector cache of one rank.
//
// A set-associative cache of 64-byte lines (one DRAM burst each) tagged by the
// DRAM address. The default size is 128 KB, the best design point reported for
// this architecture, organised as 4 ways with least-recently-used replacement,
// the organisation used in the locality study that motivates the cache.
// Embedding tables are read-only during inference, so there is no write-back:
// lines are only ever filled from DRAM and silently replaced.
//
// Line address: Daddr[31:3] (the three column bits below a BL8 burst are
// dropped). The low SET_W bits pick the set, the rest is the tag.
//
// Interface and timing:
//   lookup_valid/lookup_addr  -> one cycle later resp_valid, resp_hit and
//                                resp_data (the 1-cycle RankCache access).
//                                A hit makes the line most recently used.
//   fill_valid/fill_addr/fill_data -> writes a line fetched from DRAM into an
//                                invalid way or the LRU way of its set (or
//                                refreshes it if already present).
// A lookup and a fill may not be issued in the same cycle (the rank-NMP never
// does; an assertion checks it). Reset invalidates all lines.
module rank_cache #(
  parameter int CACHE_BYTES = 128 * 1024,
  parameter int WAYS        = 4,
  parameter int LINE_BYTES  = 64,
  parameter int ADDR_W      = 29
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    lookup_valid,
  input  logic [ADDR_W-1:0]       lookup_addr,
  output logic                    resp_valid,
  output logic                    resp_hit,
  output logic [LINE_BYTES*8-1:0] resp_data,
  input  logic                    fill_valid,
  input  logic [ADDR_W-1:0]       fill_addr,
  input  logic [LINE_BYTES*8-1:0] fill_data
);

  localparam int LINE_W = LINE_BYTES * 8;
  localparam int SETS   = CACHE_BYTES / (LINE_BYTES * WAYS);
  localparam int SET_W  = $clog2(SETS);
  localparam int TAG_W  = ADDR_W - SET_W;
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [WAYS-1:0][WAY_W-1:0] age_row_t;

  function automatic age_row_t age_init();
    age_row_t r;
    for (int w = 0; w < WAYS; w++) r[w] = WAY_W'(w);
    return r;
  endfunction

  localparam age_row_t AGE_INIT = age_init();

  logic [LINE_W-1:0] data_mem [SETS*WAYS];
  logic [TAG_W-1:0]  tag_mem  [SETS][WAYS];
  logic              vld_mem  [SETS][WAYS];
  age_row_t          age_mem  [SETS];         // per way, 0 = most recently used

  // ------------------------------------------------------------- lookup
  wire [SET_W-1:0] l_set = lookup_addr[SET_W-1:0];
  wire [TAG_W-1:0] l_tag = lookup_addr[ADDR_W-1:SET_W];
  wire [SET_W-1:0] f_set = fill_addr[SET_W-1:0];
  wire [TAG_W-1:0] f_tag = fill_addr[ADDR_W-1:SET_W];

  logic             l_hit;
  logic [WAY_W-1:0] l_way;
  logic             f_hit;
  logic [WAY_W-1:0] f_way;

  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld_mem[l_set][w] && tag_mem[l_set][w] == l_tag) begin
        l_hit = 1'b1;
        l_way = WAY_W'(w);
      end
  end

  // Fill target: the way already holding the line, else an invalid way,
  // else the least recently used way.
  always_comb begin
    logic found_inv;
    f_hit     = 1'b0;
    f_way     = '0;
    found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (vld_mem[f_set][w] && tag_mem[f_set][w] == f_tag) begin
        f_hit = 1'b1;
        f_way = WAY_W'(w);
      end
    if (!f_hit) begin
      for (int w = WAYS - 1; w >= 0; w--)
        if (!vld_mem[f_set][w]) begin
          found_inv = 1'b1;
          f_way     = WAY_W'(w);
        end
      if (!found_inv)
        for (int w = 0; w < WAYS; w++)
          if (age_mem[f_set][w] == WAY_W'(WAYS - 1)) f_way = WAY_W'(w);
    end
  end

  // Set/way being touched this cycle, for the LRU update.
  wire              touch     = (lookup_valid && l_hit) || fill_valid;
  wire [SET_W-1:0]  touch_set = fill_valid ? f_set : l_set;
  wire [WAY_W-1:0]  touch_way = fill_valid ? f_way : l_way;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      vld_mem <= '{default: 1'b0};
      age_mem <= '{default: AGE_INIT};
    end else begin
      resp_valid <= lookup_valid;
      resp_hit   <= lookup_valid && l_hit;
      if (fill_valid)
        vld_mem[f_set][f_way] <= 1'b1;
      if (touch) begin
        for (int w = 0; w < WAYS; w++) begin
          if (WAY_W'(w) == touch_way)
            age_mem[touch_set][w] <= '0;
          else if (age_mem[touch_set][w] < age_mem[touch_set][touch_way])
            age_mem[touch_set][w] <= age_mem[touch_set][w] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_mem[f_set][f_way] <= f_tag;
      data_mem[{f_set, f_way}] <= fill_data;
    end
    resp_data <= data_mem[{l_set, l_way}];
  end

  always_ff @(posedge clk)
    if (rst_n) a_no_lookup_and_fill: assert (!(lookup_valid && fill_valid));

endmodule
