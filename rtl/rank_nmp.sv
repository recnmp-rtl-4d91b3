// rank_nmp -- rank-level NMP module: executes NMP-Insts against one DRAM rank.
//
// Each NMP-Inst names one embedding vector (vsize 64-byte bursts at Daddr),
// how to weight it, which partial sum (PsumTag) it belongs to, and whether it
// is worth caching (LocalityBit). The module
//  1. queues instructions in the Inst Buffer and decodes them;
//  2. fetches the vector: with LocalityBit = 1 it looks up every burst in the
//     RankCache (1 cycle each); if all hit, the vector comes from the cache,
//     otherwise it is read from DRAM and written into the cache. With
//     LocalityBit = 0 the cache is bypassed and the vector read from DRAM;
//  3. hands the assembled vector (row buffer) to the SLS datapath, which
//     accumulates it into the partial sum of its PsumTag, while the next
//     instruction is already being fetched;
//  4. counts completed instructions (Controller, Counter++) against the count
//     the host wrote into the memory-mapped counter register and raises done
//     when they match.
// DRAM reads go through Rank.CmdDecoder, which expands the instruction's
// {ACT,RD,PRE} tags into DDR4 commands.
//
// Own choice: on a cache hit the instruction's PRE/ACT tags are still sent to
// the DRAM (without the reads), so that the row-buffer state the host memory
// controller assumed when it computed the tags stays true. The published
// description does not say what a hit does to the tags.
//
// Memory-mapped configuration (driven by the DIMM-NMP): cfg_cnt_wr loads the
// expected instruction count for the next packet, resets the count and clears
// all partial sums; cfg_vlen_wr sets the vector length in elements.
// Perf counters (cache hits, misses, bypasses) are this design's addition.
module rank_nmp
  import recnmp_pkg::*;
#(
  parameter int CACHE_BYTES    = 128 * 1024,
  parameter int CACHE_WAYS     = 4,
  parameter int INST_BUF_DEPTH = 8,
  parameter int REQ_DEPTH      = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // Rank.NMP-Inst from the DIMM-NMP
  input  logic                inst_valid,
  output logic                inst_ready,
  input  nmp_inst_t           inst,
  // memory-mapped registers
  input  logic                cfg_cnt_wr,
  input  logic [15:0]         cfg_cnt,
  input  logic                cfg_vlen_wr,
  input  logic [VLEN_W-1:0]   cfg_vlen,
  output logic                done,
  // Rank.Psum read port
  input  logic [TAG_W-1:0]    psum_rd_tag,
  input  logic [CHUNK_W-1:0]  psum_rd_chunk,
  output lane_vec_t           psum_rd_data,
  // DDR.C/A and DDR.DQ of the rank
  output ddr_ca_t             ddr_ca,
  input  logic                ddr_dq_valid,
  input  logic [DQ_W-1:0]     ddr_dq,
  // performance counters
  output logic [31:0]         n_hit,
  output logic [31:0]         n_miss,
  output logic [31:0]         n_bypass
);

  // --------------------------------------------------------- Inst Buffer
  logic      ib_valid, ib_pop;
  nmp_inst_t ib_inst;

  sync_fifo #(.WIDTH($bits(nmp_inst_t)), .DEPTH(INST_BUF_DEPTH)) u_inst_buf (
    .clk, .rst_n,
    .wr_valid (inst_valid), .wr_ready (inst_ready), .wr_data (inst),
    .rd_valid (ib_valid),   .rd_ready (ib_pop),     .rd_data (ib_inst),
    .count    ()
  );

  // ----------------------------------------------------- sub-blocks
  logic              lk_valid, rc_resp_valid, rc_resp_hit;
  logic [28:0]       lk_addr, fill_addr;
  logic [LINE_W-1:0] rc_resp_data;
  logic              fill_valid;
  logic [LINE_W-1:0] fill_data;

  rank_cache #(.CACHE_BYTES(CACHE_BYTES), .WAYS(CACHE_WAYS),
               .LINE_BYTES(LINE_BYTES), .ADDR_W(29)) u_cache (
    .clk, .rst_n,
    .lookup_valid (lk_valid), .lookup_addr (lk_addr),
    .resp_valid   (rc_resp_valid), .resp_hit (rc_resp_hit), .resp_data (rc_resp_data),
    .fill_valid   (fill_valid), .fill_addr (fill_addr), .fill_data (fill_data)
  );

  logic              rq_valid, rq_ready;
  dram_req_t         rq;
  logic              ln_valid;
  logic [LINE_W-1:0] ln_data;

  rank_cmd_decoder #(.REQ_DEPTH(REQ_DEPTH)) u_cmd (
    .clk, .rst_n,
    .req_valid (rq_valid), .req_ready (rq_ready), .req (rq),
    .ca        (ddr_ca),
    .dq_valid  (ddr_dq_valid), .dq_data (ddr_dq),
    .line_valid (ln_valid), .line_data (ln_data),
    .idle      ()
  );

  // ------------------------------------------------------ fetch engine
  typedef enum logic [2:0] {F_IDLE, F_LOOKUP, F_REQ, F_WAIT, F_TAGS} fstate_e;

  fstate_e                     fst;
  nmp_inst_t                   cur;
  logic [2:0]                  nlines;
  logic [2:0]                  lk_idx, rsp_idx, ln_idx;
  logic                        all_hit;
  logic [MAX_VSIZE*LINE_W-1:0] rowbuf;
  logic                        row_full;
  nmp_inst_t                   row_inst;

  wire [28:0] base_line = cur.daddr[31:3];

  assign ib_pop   = (fst == F_IDLE) && ib_valid && !row_full;
  assign lk_valid = (fst == F_LOOKUP) && (lk_idx < nlines);
  assign lk_addr  = base_line + 29'(lk_idx);

  assign rq_valid        = (fst == F_REQ) || (fst == F_TAGS);
  assign rq.tags.act     = cur.ddr_cmd.act;
  assign rq.tags.pre     = cur.ddr_cmd.pre;
  assign rq.tags.rd      = (fst == F_REQ) && cur.ddr_cmd.rd;
  assign rq.daddr        = cur.daddr;
  assign rq.nlines       = (fst == F_REQ) ? nlines : 3'd0;

  assign fill_valid = (fst == F_WAIT) && ln_valid && cur.locality;
  assign fill_addr  = base_line + 29'(ln_idx);
  assign fill_data  = ln_data;

  // datapath hand-over
  logic dp_ready, dp_done;
  wire  dp_start = row_full && dp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst      <= F_IDLE;
      cur      <= '0;
      nlines   <= '0;
      lk_idx   <= '0;
      rsp_idx  <= '0;
      ln_idx   <= '0;
      all_hit  <= 1'b0;
      row_full <= 1'b0;
      row_inst <= '0;
      n_hit    <= '0;
      n_miss   <= '0;
      n_bypass <= '0;
    end else begin
      if (dp_start) row_full <= 1'b0;
      unique case (fst)
        F_IDLE: if (ib_pop) begin
          cur     <= ib_inst;
          nlines  <= (ib_inst.vsize > 3'(MAX_VSIZE)) ? 3'(MAX_VSIZE) : ib_inst.vsize;
          lk_idx  <= '0;
          rsp_idx <= '0;
          ln_idx  <= '0;
          all_hit <= 1'b1;
          fst     <= ib_inst.locality ? F_LOOKUP : F_REQ;
        end
        F_LOOKUP: begin
          if (lk_valid) lk_idx <= lk_idx + 3'd1;
          if (rc_resp_valid) begin
            rsp_idx <= rsp_idx + 3'd1;
            if (!rc_resp_hit) all_hit <= 1'b0;
            if (rsp_idx + 3'd1 == nlines) begin
              if (all_hit && rc_resp_hit) begin
                n_hit <= n_hit + 32'd1;
                fst   <= (cur.ddr_cmd.act || cur.ddr_cmd.pre) ? F_TAGS : F_IDLE;
                // the row is complete now unless the tags still have to go out
                if (!(cur.ddr_cmd.act || cur.ddr_cmd.pre)) begin
                  row_full <= 1'b1;
                  row_inst <= cur;
                end
              end else begin
                n_miss <= n_miss + 32'd1;
                fst    <= F_REQ;
              end
            end
          end
        end
        F_TAGS: if (rq_ready) begin
          row_full <= 1'b1;
          row_inst <= cur;
          fst      <= F_IDLE;
        end
        F_REQ: if (rq_ready) begin
          if (!cur.locality) n_bypass <= n_bypass + 32'd1;
          fst <= (cur.ddr_cmd.rd && nlines != 3'd0) ? F_WAIT : F_IDLE;
          if (!(cur.ddr_cmd.rd && nlines != 3'd0)) begin
            row_full <= 1'b1;
            row_inst <= cur;
          end
        end
        F_WAIT: if (ln_valid) begin
          ln_idx <= ln_idx + 3'd1;
          if (ln_idx + 3'd1 == nlines) begin
            row_full <= 1'b1;
            row_inst <= cur;
            fst      <= F_IDLE;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // Row buffer: written line by line from the cache or from DRAM. A new
  // instruction is taken only once the previous row has moved to the datapath.
  always_ff @(posedge clk) begin
    if (fst == F_LOOKUP && rc_resp_valid)
      rowbuf[rsp_idx[1:0]*LINE_W +: LINE_W] <= rc_resp_data;
    if (fst == F_WAIT && ln_valid)
      rowbuf[ln_idx[1:0]*LINE_W +: LINE_W] <= ln_data;
  end

  // ------------------------------------------------- Controller / counter
  logic [15:0]       cnt_target, cnt_done;
  logic [VLEN_W-1:0] vlen_reg;
  logic              armed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_target <= '0;
      cnt_done   <= '0;
      vlen_reg   <= VLEN_W'(MAX_ELEMS);
      armed      <= 1'b0;
    end else begin
      if (cfg_vlen_wr) vlen_reg <= cfg_vlen;
      if (cfg_cnt_wr) begin
        cnt_target <= cfg_cnt;
        cnt_done   <= '0;
        armed      <= 1'b1;
      end else if (dp_done) begin
        cnt_done <= cnt_done + 16'd1;
      end
    end
  end

  assign done = armed && (cnt_done == cnt_target);

  rank_datapath u_dp (
    .clk, .rst_n,
    .clear       (cfg_cnt_wr),
    .start_valid (row_full),
    .start_ready (dp_ready),
    .op          (row_inst.op),
    .weight      (row_inst.weight),
    .tag         (row_inst.psum_tag),
    .vlen        (vlen_reg),
    .row         (rowbuf),
    .row_done    (dp_done),
    .rd_tag      (psum_rd_tag),
    .rd_chunk    (psum_rd_chunk),
    .rd_data     (psum_rd_data)
  );

  // vsize must name 1..MAX_VSIZE bursts.
  always_ff @(posedge clk)
    if (rst_n && ib_pop)
      a_vsize_legal: assert (ib_inst.vsize != 3'd0 && ib_inst.vsize <= 3'(MAX_VSIZE));

endmodule
