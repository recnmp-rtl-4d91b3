// dimm_nmp -- DIMM-level NMP module: instruction dispatch and final reduction.
//
// Dispatch: NMP-Insts arriving from the DIMM interface are held in the Inst
// Queue and forwarded, in order, to the rank-NMP named by the Rank-ID field of
// their DRAM address (a demultiplexer on Daddr.rank). The queue head waits
// until its rank accepts it.
//
// Reduction: once every rank has finished the instructions it was told to
// expect (its done flag), the module reads the partial sums of all ranks word
// by word (PsumTag x chunk of LANES elements), holds each rank's word in its
// Rank Psum Buffer, adds them with the element-wise FP32 adder tree and writes
// the result into the DIMM.Sum Buffer. When all NUM_TAGS x CHUNKS words are
// written, sum_valid rises and the host may read DIMM.Sum (one word per read,
// returned one cycle later).
//
// Memory-mapped registers (write port; addresses are this design's choice):
//   0x00 + r : expected instruction count of rank r for the next packet
//              (the host's accumulation counter); writing it clears that
//              rank's partial sums, drops sum_valid and arms the reduction
//   0x10     : vector size register, vector length in elements for all ranks
// The published design makes the counter, vector size and final sum
// registers memory mapped but gives no addresses or widths.
//
// Timing: one psum word per cycle enters the tree after a 2-cycle read and
// buffer delay; the tree adds ceil(log2(NUM_RANKS)) x 3 cycles.
module dimm_nmp
  import recnmp_pkg::*;
#(
  parameter int NUM_RANKS    = 2,
  parameter int INST_Q_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // NMP-Inst from the DIMM interface
  input  logic                host_inst_valid,
  output logic                host_inst_ready,
  input  nmp_inst_t           host_inst,
  // memory-mapped register writes
  input  logic                reg_wr,
  input  logic [7:0]          reg_addr,
  input  logic [31:0]         reg_wdata,
  // DIMM.Sum to the host
  output logic                sum_valid,
  input  logic [TAG_W-1:0]    sum_rd_tag,
  input  logic [CHUNK_W-1:0]  sum_rd_chunk,
  output lane_vec_t           sum_rd_data,
  // Rank<r>.NMP-Inst
  output logic                rank_inst_valid [NUM_RANKS],
  input  logic                rank_inst_ready [NUM_RANKS],
  output nmp_inst_t           rank_inst,
  // rank configuration
  output logic                rank_cnt_wr [NUM_RANKS],
  output logic [15:0]         rank_cnt,
  output logic                rank_vlen_wr,
  output logic [VLEN_W-1:0]   rank_vlen,
  input  logic                rank_done [NUM_RANKS],
  // Rank<r>.Psum read
  output logic [TAG_W-1:0]    psum_rd_tag,
  output logic [CHUNK_W-1:0]  psum_rd_chunk,
  input  lane_vec_t           rank_psum [NUM_RANKS]
);

  localparam int WORDS  = NUM_TAGS * CHUNKS;
  localparam int WIDX_W = TAG_W + CHUNK_W;

  // ------------------------------------------------------------ Inst Queue
  logic      q_valid, q_pop;
  nmp_inst_t q_inst;

  sync_fifo #(.WIDTH($bits(nmp_inst_t)), .DEPTH(INST_Q_DEPTH)) u_inst_q (
    .clk, .rst_n,
    .wr_valid (host_inst_valid), .wr_ready (host_inst_ready), .wr_data (host_inst),
    .rd_valid (q_valid),         .rd_ready (q_pop),           .rd_data (q_inst),
    .count    ()
  );

  // Rank-ID demultiplexer
  wire [1:0] rid = q_inst.daddr.rank;
  assign rank_inst = q_inst;

  always_comb begin
    q_pop = 1'b0;
    for (int r = 0; r < NUM_RANKS; r++) begin
      rank_inst_valid[r] = q_valid && (int'(rid) == r);
      if (rank_inst_valid[r] && rank_inst_ready[r]) q_pop = 1'b1;
    end
  end

  // ------------------------------------------------------------ registers
  always_comb begin
    for (int r = 0; r < NUM_RANKS; r++)
      rank_cnt_wr[r] = reg_wr && (reg_addr == 8'(r));
  end
  assign rank_cnt     = reg_wdata[15:0];
  assign rank_vlen_wr = reg_wr && (reg_addr == 8'h10);
  assign rank_vlen    = reg_wdata[VLEN_W-1:0];

  wire any_cnt_wr = reg_wr && (reg_addr < 8'(NUM_RANKS));

  // ------------------------------------------------------------ reduction
  typedef enum logic [1:0] {R_IDLE, R_RUN, R_WAIT} rstate_e;

  rstate_e            rst_q;
  logic               armed;
  logic [WIDX_W:0]    rd_idx, wr_idx;
  logic               rd_v1, buf_v;
  lane_vec_t          psum_buf [NUM_RANKS];      // Rank<r>.Psum Buffer
  logic               tree_v;
  lane_vec_t          tree_y;
  lane_vec_t          sum_buf [WORDS];           // DIMM.Sum Buffer

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int r = 0; r < NUM_RANKS; r++) all_done &= rank_done[r];
  end

  assign psum_rd_tag   = rd_idx[WIDX_W-1:CHUNK_W];
  assign psum_rd_chunk = rd_idx[CHUNK_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q     <= R_IDLE;
      armed     <= 1'b0;
      sum_valid <= 1'b0;
      rd_idx    <= '0;
      wr_idx    <= '0;
      rd_v1     <= 1'b0;
      buf_v     <= 1'b0;
    end else begin
      rd_v1 <= (rst_q == R_RUN);
      buf_v <= rd_v1;
      if (any_cnt_wr) begin
        armed     <= 1'b1;
        sum_valid <= 1'b0;
      end
      unique case (rst_q)
        R_IDLE: if (armed && all_done && !any_cnt_wr) begin
          rd_idx <= '0;
          wr_idx <= '0;
          rst_q  <= R_RUN;
        end
        R_RUN: begin
          rd_idx <= rd_idx + 1'b1;
          if (rd_idx == (WIDX_W+1)'(WORDS - 1)) rst_q <= R_WAIT;
        end
        R_WAIT: if (wr_idx == (WIDX_W+1)'(WORDS)) begin
          rst_q     <= R_IDLE;
          armed     <= 1'b0;
          sum_valid <= 1'b1;
        end
        default: rst_q <= R_IDLE;
      endcase
      if (tree_v) wr_idx <= wr_idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_v1) psum_buf <= rank_psum;
    if (tree_v) sum_buf[wr_idx[WIDX_W-1:0]] <= tree_y;
    sum_rd_data <= sum_buf[{sum_rd_tag, sum_rd_chunk}];
  end

  fp32_adder_tree #(.N_IN(NUM_RANKS)) u_tree (
    .clk, .rst_n,
    .in_valid (buf_v),
    .in_vec   (psum_buf),
    .out_valid(tree_v),
    .out_vec  (tree_y)
  );

  // Every instruction must name a rank that exists on this DIMM.
  always_ff @(posedge clk)
    if (rst_n && q_valid) a_rank_exists: assert (int'(rid) < NUM_RANKS);

endmodule
