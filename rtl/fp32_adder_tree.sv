// fp32_adder_tree -- element-wise FP32 adder tree of the DIMM-NMP.
//
// Adds N_IN vectors of LANES single-precision elements lane by lane:
// out[l] = sum over i of in[i][l]. The tree has ceil(log2(N_IN)) levels of
// pipelined FP32 adders (3 cycles each); inputs beyond N_IN up to the next
// power of two are zero. One new set of vectors can enter every cycle and its
// sum leaves LEVELS*3 cycles later. With N_IN = 1 the vector passes through
// one adder that adds zero, so the latency is never zero.
// The number of inputs equals the number of ranks on the DIMM, as in the
// published DIMM-NMP; the pairwise tree shape is this design's choice.
module fp32_adder_tree
  import recnmp_pkg::*;
#(
  parameter int N_IN = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  lane_vec_t in_vec [N_IN],
  output logic      out_valid,
  output lane_vec_t out_vec
);

  localparam int LEVELS = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int WIDTH  = 1 << LEVELS;

  lane_vec_t lvl_vec [LEVELS+1][WIDTH];
  logic      lvl_v   [LEVELS+1];

  for (genvar i = 0; i < WIDTH; i++) begin : g_in
    if (i < N_IN) begin : g_used
      assign lvl_vec[0][i] = in_vec[i];
    end else begin : g_zero
      assign lvl_vec[0][i] = '0;
    end
  end
  assign lvl_v[0] = in_valid;

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int NODES = WIDTH >> (l + 1);
    logic [LANES-1:0] node_v [NODES];
    for (genvar n = 0; n < NODES; n++) begin : g_node
      for (genvar k = 0; k < LANES; k++) begin : g_lane
        fp32_add #(.LAT(FP_ADD_LAT)) u_add (
          .clk, .rst_n,
          .in_valid  (lvl_v[l]),
          .a         (lvl_vec[l][2*n][k*32 +: 32]),
          .b         (lvl_vec[l][2*n+1][k*32 +: 32]),
          .out_valid (node_v[n][k]),
          .y         (lvl_vec[l+1][n][k*32 +: 32]));
      end
    end
    assign lvl_v[l+1] = node_v[0][0];
    for (genvar n = NODES; n < WIDTH; n++) begin : g_pad
      assign lvl_vec[l+1][n] = '0;
    end
  end

  assign out_valid = lvl_v[LEVELS];
  assign out_vec   = lvl_vec[LEVELS][0];

endmodule
