// rank_cmd_decoder -- Rank.CmdDecoder: expands compressed DRAM requests into
// DDR4 commands for one rank and gathers the returned read bursts.
//
// Each request carries the three command tags of an NMP-Inst ({ACT,RD,PRE}
// present/absent), its DRAM address and the number of 64-byte bursts to read.
// The Req Queue holds requests; the Addr Decoder splits the address into bank
// group, bank, row and column; the Cmd Generator issues, in order,
//   PRE (if tagged), ACT Row (if tagged), RD Col, RD Col+8, ... (one RD per
//   burst, only if the RD tag is set)
// e.g. a 128 B vector with a row-buffer miss gives {PRE, ACT Row, RD Col,
// RD Col+8}. Between its own commands the generator keeps the DDR4-2400
// spacings tRP (PRE->ACT), tRCD (ACT->RD), tCCD_L (RD->RD), tRC (ACT->ACT),
// tRAS (ACT->PRE) and tRTP (RD->PRE). It tracks them per rank, not per bank,
// which is conservative; everything else (ordering, refresh, cross-rank
// arbitration) is left to the host memory controller, which pre-computed the
// tags. A DES (deselect) is driven in every cycle without a command.
//
// Read data: the DRAM returns each burst as four DQ_W-bit words (two 64-bit
// DDR beats per DRAM clock), tCL after its RD. Words are packed, first word in
// the least significant bits, into a 512-bit line, presented on line_valid for
// one cycle. Reads return in order, so no tag travels with them.
module rank_cmd_decoder
  import recnmp_pkg::*;
#(
  parameter int REQ_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from the rank-NMP
  input  logic              req_valid,
  output logic              req_ready,
  input  dram_req_t         req,
  // DDR.C/A to the rank's devices
  output ddr_ca_t           ca,
  // DDR.DQ from the rank's devices
  input  logic              dq_valid,
  input  logic [DQ_W-1:0]   dq_data,
  // assembled bursts
  output logic              line_valid,
  output logic [LINE_W-1:0] line_data,
  output logic              idle
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_ACT, S_RD} state_e;

  localparam int TW = 7;                 // timer width, saturates at 127
  localparam logic [TW-1:0] TMAX = '1;

  // ---------------------------------------------------------- Req Queue
  logic      q_valid, q_pop;
  dram_req_t q_req;

  sync_fifo #(.WIDTH($bits(dram_req_t)), .DEPTH(REQ_DEPTH)) u_req_queue (
    .clk, .rst_n,
    .wr_valid (req_valid), .wr_ready (req_ready), .wr_data (req),
    .rd_valid (q_valid),   .rd_ready (q_pop),     .rd_data (q_req),
    .count    ()
  );

  // --------------------------------------------------------- generator
  state_e          state;
  dram_req_t       cur;
  logic [2:0]      rd_left;
  logic [9:0]      rd_col;
  logic [TW-1:0]   t_act, t_pre, t_rd;   // cycles since last ACT / PRE / RD

  wire can_pre = (t_act >= TW'(T_RAS)) && (t_rd >= TW'(T_RTP));
  wire can_act = (t_pre >= TW'(T_RP))  && (t_act >= TW'(T_RC));
  wire can_rd  = (t_act >= TW'(T_RCD)) && (t_rd >= TW'(T_CCD_L));

  assign q_pop = (state == S_IDLE) && q_valid;

  // next phase after PRE / after ACT
  function automatic state_e after_pre(dram_req_t r);
    if (r.tags.act)                    return S_ACT;
    if (r.tags.rd && r.nlines != 3'd0) return S_RD;
    return S_IDLE;
  endfunction

  function automatic state_e first_phase(dram_req_t r);
    if (r.tags.pre) return S_PRE;
    return after_pre(r);
  endfunction

  ddr_ca_t ca_n;
  always_comb begin
    ca_n     = '0;
    ca_n.cmd = DDR_DES;
    ca_n.bg  = cur.daddr.bg;
    ca_n.ba  = cur.daddr.ba;
    ca_n.row = cur.daddr.row;
    ca_n.col = rd_col;
    unique case (state)
      S_PRE: if (can_pre) ca_n.cmd = DDR_PRE;
      S_ACT: if (can_act) ca_n.cmd = DDR_ACT;
      S_RD:  if (can_rd)  ca_n.cmd = DDR_RD;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur     <= '0;
      rd_left <= '0;
      rd_col  <= '0;
      t_act   <= TMAX;
      t_pre   <= TMAX;
      t_rd    <= TMAX;
      ca      <= '0;
    end else begin
      ca <= ca_n;
      if (t_act != TMAX) t_act <= t_act + 1'b1;
      if (t_pre != TMAX) t_pre <= t_pre + 1'b1;
      if (t_rd  != TMAX) t_rd  <= t_rd  + 1'b1;
      unique case (state)
        S_IDLE: if (q_valid) begin
          cur     <= q_req;
          rd_left <= q_req.nlines;
          rd_col  <= q_req.daddr.col;
          state   <= first_phase(q_req);
        end
        S_PRE: if (can_pre) begin
          t_pre <= TW'(1);
          state <= after_pre(cur);
        end
        S_ACT: if (can_act) begin
          t_act <= TW'(1);
          state <= (cur.tags.rd && cur.nlines != 3'd0) ? S_RD : S_IDLE;
        end
        S_RD: if (can_rd) begin
          t_rd    <= TW'(1);
          rd_col  <= rd_col + 10'd8;
          rd_left <= rd_left - 3'd1;
          if (rd_left == 3'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------- burst assembly
  logic [1:0]        beat;
  logic [LINE_W-1:0] asm_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat       <= '0;
      line_valid <= 1'b0;
    end else begin
      line_valid <= 1'b0;
      if (dq_valid) begin
        beat <= beat + 2'd1;
        if (beat == 2'(BEATS_PER_LINE - 1)) line_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (dq_valid) asm_line[beat*DQ_W +: DQ_W] <= dq_data;
  end

  assign line_data = asm_line;
  assign idle      = (state == S_IDLE) && !q_valid;

endmodule
