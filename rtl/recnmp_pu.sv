// recnmp_pu -- RecNMP processing unit: the near-memory logic of one DIMM's
// buffer chip.
//
// One DIMM-NMP module and NUM_RANKS rank-NMP modules. NMP-Insts from the host
// memory controller enter through the DIMM interface, are steered by Rank-ID
// to the rank-NMPs, which gather and pool embedding vectors from their own
// rank concurrently (each with its own RankCache and DDR command decoder),
// and the DIMM-NMP adds the ranks' partial sums into the final pooled vectors
// (DIMM.Sum) that the host reads back. The default of two ranks per DIMM is
// the configuration drawn for the unit and used in the evaluated system.
//
// Ports: the digital side of the DIMM interface (instruction stream,
// memory-mapped register writes, DIMM.Sum reads) and, per rank, the DDR.C/A
// command bus and the DDR.DQ read-data bus of the rank's DRAM devices. The DDR
// PHY and the DRAM devices themselves are outside this RTL.
module recnmp_pu
  import recnmp_pkg::*;
#(
  parameter int NUM_RANKS   = 2,
  parameter int CACHE_BYTES = 128 * 1024
) (
  input  logic                clk,
  input  logic                rst_n,
  // DIMM interface (host side, after the PHY)
  input  logic                host_inst_valid,
  output logic                host_inst_ready,
  input  nmp_inst_t           host_inst,
  input  logic                reg_wr,
  input  logic [7:0]          reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic                sum_valid,
  input  logic [TAG_W-1:0]    sum_rd_tag,
  input  logic [CHUNK_W-1:0]  sum_rd_chunk,
  output lane_vec_t           sum_rd_data,
  // per-rank DRAM interface
  output ddr_ca_t             ddr_ca       [NUM_RANKS],
  input  logic                ddr_dq_valid [NUM_RANKS],
  input  logic [DQ_W-1:0]     ddr_dq       [NUM_RANKS],
  // per-rank performance counters
  output logic [31:0]         n_hit        [NUM_RANKS],
  output logic [31:0]         n_miss       [NUM_RANKS],
  output logic [31:0]         n_bypass     [NUM_RANKS]
);

  logic               rank_inst_valid [NUM_RANKS];
  logic               rank_inst_ready [NUM_RANKS];
  nmp_inst_t          rank_inst;
  logic               rank_cnt_wr     [NUM_RANKS];
  logic [15:0]        rank_cnt;
  logic               rank_vlen_wr;
  logic [VLEN_W-1:0]  rank_vlen;
  logic               rank_done       [NUM_RANKS];
  logic [TAG_W-1:0]   psum_rd_tag;
  logic [CHUNK_W-1:0] psum_rd_chunk;
  lane_vec_t          rank_psum       [NUM_RANKS];

  dimm_nmp #(.NUM_RANKS(NUM_RANKS)) u_dimm (
    .clk, .rst_n,
    .host_inst_valid, .host_inst_ready, .host_inst,
    .reg_wr, .reg_addr, .reg_wdata,
    .sum_valid, .sum_rd_tag, .sum_rd_chunk, .sum_rd_data,
    .rank_inst_valid, .rank_inst_ready, .rank_inst,
    .rank_cnt_wr, .rank_cnt, .rank_vlen_wr, .rank_vlen, .rank_done,
    .psum_rd_tag, .psum_rd_chunk, .rank_psum
  );

  for (genvar r = 0; r < NUM_RANKS; r++) begin : g_rank
    rank_nmp #(.CACHE_BYTES(CACHE_BYTES)) u_rank (
      .clk, .rst_n,
      .inst_valid    (rank_inst_valid[r]),
      .inst_ready    (rank_inst_ready[r]),
      .inst          (rank_inst),
      .cfg_cnt_wr    (rank_cnt_wr[r]),
      .cfg_cnt       (rank_cnt),
      .cfg_vlen_wr   (rank_vlen_wr),
      .cfg_vlen      (rank_vlen),
      .done          (rank_done[r]),
      .psum_rd_tag   (psum_rd_tag),
      .psum_rd_chunk (psum_rd_chunk),
      .psum_rd_data  (rank_psum[r]),
      .ddr_ca        (ddr_ca[r]),
      .ddr_dq_valid  (ddr_dq_valid[r]),
      .ddr_dq        (ddr_dq[r]),
      .n_hit         (n_hit[r]),
      .n_miss        (n_miss[r]),
      .n_bypass      (n_bypass[r])
    );
  end

endmodule
