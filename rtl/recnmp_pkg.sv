// recnmp_pkg -- types and constants shared by the RecNMP processing unit.
//
// The NMP instruction (NMP-Inst) is 79 bits wide. Its fields, from the most
// significant end, are: opcode (4), DDR cmd tags {ACT,RD,PRE} (3), DRAM
// address Daddr = {Rank,BG,BA,Row,Col} (32), vsize (3), weight in FP32 (32),
// LocalityBit (1) and PsumTag (4). Field order and widths follow the published
// instruction format; the opcode encodings, the bit order of the three
// command tags and the split of the 32-bit Daddr into rank/bank-group/bank/
// row/column widths are this design's choice (2+2+2+16+10 bits, sized for
// 8 Gb x8 DDR4 devices).
//
// The DRAM timing values are in DRAM clock cycles (DDR4-2400) and the whole
// unit is clocked by the DRAM clock, so the FP32 latencies (adder 3, multiplier
// 4) and the 1-cycle cache access are counted in the same unit.
package recnmp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int INST_W     = 79;
  localparam int FP_W       = 32;
  localparam int TAG_W      = 4;               // PsumTag width
  localparam int NUM_TAGS   = 1 << TAG_W;     // poolings per NMP packet
  localparam int DQ_W       = 128;            // one DRAM clock = two 64-bit beats
  localparam int LINE_BYTES = 64;             // one BL8 burst of a x64 rank
  localparam int LINE_W     = LINE_BYTES * 8;
  localparam int BEATS_PER_LINE = LINE_W / DQ_W;  // = tBL = 4 DRAM cycles
  localparam int LANES      = 4;              // FP32 elements per datapath step
  localparam int MAX_VSIZE  = 4;              // 256 B, largest production vector
  localparam int MAX_ELEMS  = MAX_VSIZE * LINE_BYTES / 4;  // 64 FP32 elements
  localparam int CHUNKS     = MAX_ELEMS / LANES;            // 16
  localparam int CHUNK_W    = $clog2(CHUNKS);
  localparam int VLEN_W     = $clog2(MAX_ELEMS + 1);

  // ----------------------------------------------------- DDR4-2400 timing
  localparam int T_RC   = 55;
  localparam int T_RCD  = 16;
  localparam int T_CL   = 16;
  localparam int T_RP   = 16;
  localparam int T_BL   = 4;
  localparam int T_CCD_S = 4;
  localparam int T_CCD_L = 6;
  localparam int T_RRD_S = 4;
  localparam int T_RRD_L = 6;
  localparam int T_FAW  = 26;
  localparam int T_RAS  = T_RC - T_RP;        // derived: ACT to PRE, same bank
  localparam int T_RTP  = 9;                  // RD to PRE: not in the published
                                              // table, DDR4-2400 datasheet value

  // ------------------------------------------------------ arithmetic units
  localparam int FP_ADD_LAT = 3;
  localparam int FP_MUL_LAT = 4;
  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

  // ---------------------------------------------------------- NMP-Inst
  typedef enum logic [3:0] {
    OP_SUM       = 4'd0,   // nmp_sum      : weight forced to 1.0
    OP_MEAN      = 4'd1,   // nmp_mean     : weight field carries 1/length
    OP_WSUM      = 4'd2,   // nmp_weightedsum
    OP_WMEAN     = 4'd3,   // nmp_weightedmean (weight pre-divided by length)
    OP_WSUM_8B   = 4'd4,   // nmp_weightedsum_8bits  (row-wise quantised)
    OP_WMEAN_8B  = 4'd5    // nmp_weightedmean_8bits
  } nmp_op_e;

  typedef struct packed {
    logic act;
    logic rd;
    logic pre;
  } ddr_tags_t;

  typedef struct packed {
    logic [1:0]  rank;
    logic [1:0]  bg;
    logic [1:0]  ba;
    logic [15:0] row;
    logic [9:0]  col;
  } daddr_t;

  typedef struct packed {
    nmp_op_e      op;
    ddr_tags_t    ddr_cmd;
    daddr_t       daddr;
    logic [2:0]   vsize;      // vector size in 64 B bursts
    logic [31:0]  weight;     // FP32
    logic         locality;   // LocalityBit: 1 = cache, 0 = bypass
    logic [TAG_W-1:0] psum_tag;
  } nmp_inst_t;

  // -------------------------------------------------- DDR C/A to a rank
  typedef enum logic [1:0] {
    DDR_DES = 2'd0,   // device deselect (no command)
    DDR_ACT = 2'd1,
    DDR_RD  = 2'd2,
    DDR_PRE = 2'd3
  } ddr_cmd_e;

  typedef struct packed {
    ddr_cmd_e    cmd;
    logic [1:0]  bg;
    logic [1:0]  ba;
    logic [15:0] row;
    logic [9:0]  col;
  } ddr_ca_t;

  // Request handed from the rank-NMP to its command decoder.
  typedef struct packed {
    ddr_tags_t  tags;
    daddr_t     daddr;
    logic [2:0] nlines;       // bursts to read (0 = PRE/ACT only)
  } dram_req_t;

  typedef logic [LANES*FP_W-1:0] lane_vec_t;

  function automatic logic is_8bit(nmp_op_e op);
    return (op == OP_WSUM_8B) || (op == OP_WMEAN_8B);
  endfunction

  // Signed 8-bit integer to FP32 (always exact).
  function automatic logic [31:0] int8_to_fp32(logic [7:0] v);
    logic       s;
    logic [7:0] a;
    int         msb;
    logic [22:0] man;
    s = v[7];
    a = s ? (~v + 8'd1) : v;
    if (a == 8'd0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 8; i++) if (a[i]) msb = i;
    man = 23'(({15'd0, a} << (23 - msb)) & 23'h7f_ffff);
    return {s, 8'(127 + msb), man};
  endfunction

endpackage
