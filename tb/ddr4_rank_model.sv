// ddr4_rank_model -- behavioural model of one DDR4 rank (x64) for simulation.
//
// Behavioural model, not synthesizable. It accepts the PRE/ACT/RD/DES
// commands of the processing unit's DDR.C/A bus and, tCL cycles after each
// RD, returns the addressed 64-byte burst as four 128-bit words on DDR.DQ
// (two 64-bit beats per DRAM clock, tBL = 4). Contents come from an
// associative array of lines written by the testbench (write_line), or from
// recnmp_tb_pkg::emb_line for lines never written.
//
// It also checks the protocol per bank: RD or PRE to a bank without an open
// row, ACT to a bank that is already open, and the tRCD, tRP, tRAS and tRC
// spacings. Every breach increments `violations`. While RESET_n is low the
// C/A bus is ignored. Counters n_act, n_pre and
// n_rd count the commands received.
module ddr4_rank_model
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;
#(
  parameter logic [1:0] RANK_ID = 2'd0
) (
  input  logic            clk,
  input  logic            reset_n,    // RESET_n: commands are ignored while low
  input  ddr_ca_t         ca,
  output logic            dq_valid,
  output logic [DQ_W-1:0] dq
);

  int unsigned violations = 0;
  int unsigned n_act = 0, n_pre = 0, n_rd = 0;
  longint      cyc = 0;

  logic [511:0] mem [logic [28:0]];
  bit           open_b [16];
  logic [15:0]  row_b  [16];
  longint       t_act_b [16];
  longint       t_pre_b [16];

  // pending read bursts: ready cycle and data
  longint       rd_due [$];
  logic [511:0] rd_line [$];
  int           beat = 0;

  initial begin
    for (int b = 0; b < 16; b++) begin
      open_b[b]  = 1'b0;
      row_b[b]   = '0;
      t_act_b[b] = -1000;
      t_pre_b[b] = -1000;
    end
    dq_valid = 1'b0;
    dq       = '0;
  end

  function automatic void write_line(logic [28:0] a, logic [511:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [511:0] read_line(logic [28:0] a);
    if (mem.exists(a)) return mem[a];
    return emb_line(a);
  endfunction

  always @(posedge clk) begin
    int b;
    cyc++;
    b = {ca.bg, ca.ba};
    if (reset_n) case (ca.cmd)
      DDR_ACT: begin
        n_act++;
        if (open_b[b]) violations++;
        if (cyc - t_pre_b[b] < T_RP) violations++;
        if (cyc - t_act_b[b] < T_RC) violations++;
        open_b[b]  = 1'b1;
        row_b[b]   = ca.row;
        t_act_b[b] = cyc;
      end
      DDR_PRE: begin
        n_pre++;
        if (!open_b[b]) violations++;
        if (cyc - t_act_b[b] < T_RAS) violations++;
        open_b[b]  = 1'b0;
        t_pre_b[b] = cyc;
      end
      DDR_RD: begin
        n_rd++;
        if (!open_b[b]) violations++;
        if (cyc - t_act_b[b] < T_RCD) violations++;
        rd_due.push_back(cyc + T_CL);
        rd_line.push_back(read_line({RANK_ID, ca.bg, ca.ba, row_b[b], ca.col[9:3]}));
      end
      default: ;
    endcase
    // drive read data
    dq_valid <= 1'b0;
    if (rd_due.size() > 0 && rd_due[0] <= cyc) begin
      dq_valid <= 1'b1;
      dq       <= rd_line[0][beat*DQ_W +: DQ_W];
      if (beat == BEATS_PER_LINE - 1) begin
        beat = 0;
        void'(rd_due.pop_front());
        void'(rd_line.pop_front());
      end else beat++;
    end
  end

endmodule
