// rank_datapath -- SLS-family arithmetic of one rank-NMP.
//
// For every embedding vector (row) handed over, the datapath updates the
// partial-sum vector selected by the instruction's PsumTag:
//     psum[tag][i] += w * (s * x[i] + b)        for i < vlen
// which is computed as  psum += (w*s)*x[i] + (w*b).
// The registers follow the published rank-NMP datapath: Weight Reg (from the
// instruction's weight field; forced to 1.0 for nmp_sum), Scalar and Bias
// Regs (1.0/0.0 for FP32 rows; for 8-bit row-wise quantised rows they are read
// from the row itself), the Input Emb Vector Reg holding the row, and the
// Psum.RegFile holding one vector per PsumTag.
//
// Own choices where the description stops:
//  * LANES (4) elements are processed per cycle. Per lane there is one
//    multiplier (w*s times x), one adder (+ w*b) and one accumulating adder;
//    two shared multipliers form w*s and w*b once per row.
//  * 8-bit row layout: bytes 0-3 = scale (FP32), bytes 4-7 = bias (FP32),
//    element i = signed byte 8+i. FP32 rows: element i = bytes 4i..4i+3.
//  * vlen (vector length in elements, from the memory-mapped vector size
//    register) bounds the elements updated; psum lanes beyond it are kept.
//  * A row's chunks address distinct psum words, so chunks issue back to
//    back; the next row is accepted only after the previous row has been
//    written back (read-after-write on the same PsumTag is thereby avoided).
//
// Timing: start is accepted when start_ready; 4 cycles for w*s / w*b, then one
// chunk per cycle, each taking 4 (mul) + 3 (add) + 3 (accumulate) cycles;
// row_done pulses when the last chunk is written. The Rank.Psum read port
// (rd_tag, rd_chunk) returns rd_data one cycle later. clear zeroes every psum.
module rank_datapath
  import recnmp_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         start_valid,
  output logic                         start_ready,
  input  nmp_op_e                      op,
  input  logic [31:0]                  weight,
  input  logic [TAG_W-1:0]             tag,
  input  logic [VLEN_W-1:0]            vlen,
  input  logic [MAX_VSIZE*LINE_W-1:0]  row,
  output logic                         row_done,
  input  logic [TAG_W-1:0]             rd_tag,
  input  logic [CHUNK_W-1:0]           rd_chunk,
  output lane_vec_t                    rd_data
);

  typedef enum logic [1:0] {D_IDLE, D_SCALE, D_ISSUE, D_DRAIN} dstate_e;

  dstate_e                     st;
  logic [MAX_VSIZE*LINE_W-1:0] emb_reg;      // Input Emb Vector Reg
  logic [31:0]                 weight_reg, scalar_reg, bias_reg;
  logic [31:0]                 ws_reg, wb_reg;
  logic                        is8_reg;
  logic [TAG_W-1:0]            tag_reg;
  logic [VLEN_W-1:0]           vlen_reg;
  logic [CHUNK_W:0]            nchunks, issue_cnt, acc_in_cnt, wb_cnt;

  lane_vec_t psum_rf [NUM_TAGS][CHUNKS];     // Psum.RegFile

  assign start_ready = (st == D_IDLE) && !clear;

  // ------------------------------------------- w*s and w*b (shared mults)
  logic        sc_go, ws_pending;
  logic        ws_v, wb_v;
  logic [31:0] ws_y, wb_y;
  assign sc_go = (st == D_SCALE) && !ws_pending;

  fp32_mul #(.LAT(FP_MUL_LAT)) u_mul_ws (
    .clk, .rst_n, .in_valid(sc_go), .a(weight_reg), .b(scalar_reg),
    .out_valid(ws_v), .y(ws_y));
  fp32_mul #(.LAT(FP_MUL_LAT)) u_mul_wb (
    .clk, .rst_n, .in_valid(sc_go), .a(weight_reg), .b(bias_reg),
    .out_valid(wb_v), .y(wb_y));

  // ------------------------------------------------------ lane pipeline
  logic [LANES-1:0]  m_v, b_v, a_v;
  logic [31:0]       x_lane [LANES];
  logic [31:0]       m_y [LANES];
  logic [31:0]       b_y [LANES];
  logic [31:0]       a_y [LANES];
  wire               issue = (st == D_ISSUE);
  lane_vec_t         psum_cur;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int e;
      e = int'(issue_cnt) * LANES + l;
      if (is8_reg) x_lane[l] = int8_to_fp32(emb_reg[(8 + e) * 8 +: 8]);
      else         x_lane[l] = emb_reg[e * 32 +: 32];
    end
  end

  assign psum_cur = psum_rf[tag_reg][acc_in_cnt[CHUNK_W-1:0]];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_mul #(.LAT(FP_MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(issue), .a(ws_reg), .b(x_lane[l]),
      .out_valid(m_v[l]), .y(m_y[l]));
    fp32_add #(.LAT(FP_ADD_LAT)) u_bias (
      .clk, .rst_n, .in_valid(m_v[l]), .a(m_y[l]), .b(wb_reg),
      .out_valid(b_v[l]), .y(b_y[l]));
    fp32_add #(.LAT(FP_ADD_LAT)) u_acc (
      .clk, .rst_n, .in_valid(b_v[l]), .a(b_y[l]), .b(psum_cur[l*32 +: 32]),
      .out_valid(a_v[l]), .y(a_y[l]));
  end

  // chunk index of the word leaving the accumulators
  logic [CHUNK_W-1:0] wb_chunk;
  assign wb_chunk = wb_cnt[CHUNK_W-1:0];

  lane_vec_t wb_word;
  always_comb begin
    wb_word = psum_rf[tag_reg][wb_chunk];
    for (int l = 0; l < LANES; l++)
      if (int'(wb_cnt) * LANES + l < int'(vlen_reg)) wb_word[l*32 +: 32] = a_y[l];
  end

  // -------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_IDLE;
      issue_cnt  <= '0;
      acc_in_cnt <= '0;
      wb_cnt     <= '0;
      nchunks    <= '0;
      ws_pending <= 1'b0;
      row_done   <= 1'b0;
      tag_reg    <= '0;
      vlen_reg   <= '0;
      is8_reg    <= 1'b0;
      weight_reg <= FP_ONE;
      scalar_reg <= FP_ONE;
      bias_reg   <= FP_ZERO;
      ws_reg     <= FP_ONE;
      wb_reg     <= FP_ZERO;
      psum_rf    <= '{default: '0};
    end else begin
      row_done <= 1'b0;
      if (clear) psum_rf <= '{default: '0};
      unique case (st)
        D_IDLE: if (start_valid && start_ready) begin
          tag_reg    <= tag;
          vlen_reg   <= vlen;
          nchunks    <= (CHUNK_W+1)'((int'(vlen) + LANES - 1) / LANES);
          is8_reg    <= is_8bit(op);
          weight_reg <= (op == OP_SUM) ? FP_ONE : weight;
          scalar_reg <= is_8bit(op) ? row[31:0]  : FP_ONE;
          bias_reg   <= is_8bit(op) ? row[63:32] : FP_ZERO;
          issue_cnt  <= '0;
          acc_in_cnt <= '0;
          wb_cnt     <= '0;
          st         <= (vlen == '0) ? D_DRAIN : D_SCALE;
        end
        D_SCALE: begin
          if (sc_go) ws_pending <= 1'b1;
          if (ws_v) begin
            ws_reg     <= ws_y;
            wb_reg     <= wb_y;
            ws_pending <= 1'b0;
            st         <= D_ISSUE;
          end
        end
        D_ISSUE: begin
          issue_cnt <= issue_cnt + 1'b1;
          if (issue_cnt + 1'b1 == nchunks) st <= D_DRAIN;
        end
        D_DRAIN: if (wb_cnt == nchunks) begin
          row_done <= 1'b1;
          st       <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
      if (b_v[0]) acc_in_cnt <= acc_in_cnt + 1'b1;
      if (a_v[0]) begin
        psum_rf[tag_reg][wb_chunk] <= wb_word;
        wb_cnt <= wb_cnt + 1'b1;
      end
    end
  end

  // Input Emb Vector Reg and the Rank.Psum read register need no reset.
  always_ff @(posedge clk) begin
    if (st == D_IDLE && start_valid && start_ready) emb_reg <= row;
    rd_data <= psum_rf[rd_tag][rd_chunk];
  end

  // The partial sums may only be cleared between packets.
  always_ff @(posedge clk)
    if (rst_n) a_no_clear_while_busy: assert (st == D_IDLE || !clear);

endmodule
