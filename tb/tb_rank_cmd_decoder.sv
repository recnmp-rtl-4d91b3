// tb_rank_cmd_decoder -- self-checking test of Rank.CmdDecoder.
//
// The testbench plays the host memory controller: it keeps its own open-row
// table per bank and gives every request the {PRE, ACT, RD} tags that table
// implies (row hit: RD only; bank closed: ACT+RD; row conflict: PRE+ACT+RD),
// sometimes with the RD tag dropped, as the rank-NMP does after a cache hit.
// A DDR4 rank model executes the commands, counts protocol breaches and
// returns the data. Checked: no breach, the exact command counts, the bursts
// returned in order with the right contents and column steps of 8, and the
// cycle spacings ACT->RD = tRCD and RD->RD = tCCD_L when nothing else holds
// the generator back, PRE->ACT >= tRP, and RD to assembled line = tCL plus
// the four data cycles plus one register.
module tb_rank_cmd_decoder;
  import recnmp_pkg::*;
  import recnmp_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              req_valid = 0, req_ready;
  dram_req_t         req;
  ddr_ca_t           ca;
  logic              dq_valid;
  logic [DQ_W-1:0]   dq;
  logic              line_valid, idle;
  logic [LINE_W-1:0] line_data;

  rank_cmd_decoder dut (.clk, .rst_n, .req_valid, .req_ready, .req, .ca,
                        .dq_valid, .dq_data(dq), .line_valid, .line_data, .idle);
  ddr4_rank_model #(.RANK_ID(2'd0)) u_dram (.clk, .reset_n(rst_n), .ca, .dq_valid, .dq);

  // host-side row table
  bit          open_b [16];
  logic [15:0] row_b  [16];
  int exp_act = 0, exp_pre = 0, exp_rd = 0;
  logic [28:0] exp_lines [$];

  // monitor of the C/A bus
  longint cyc = 0, last_act = -1000, last_pre = -1000, last_rd = -1000;
  longint rd_cycles [$];
  int n_tight_rcd = 0, n_tight_ccd = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) case (ca.cmd)
      DDR_ACT: begin
        checks++;
        if (cyc - last_pre < T_RP) begin failures++; $display("FAIL PRE->ACT %0d", cyc - last_pre); end
        last_act = cyc;
      end
      DDR_PRE: last_pre = cyc;
      DDR_RD: begin
        checks++;
        if (last_rd < last_act) begin
          if (cyc - last_act < T_RCD) begin failures++; $display("FAIL ACT->RD %0d", cyc - last_act); end
          if (cyc - last_act == T_RCD) n_tight_rcd++;
        end else begin
          if (cyc - last_rd < T_CCD_L) begin failures++; $display("FAIL RD->RD %0d", cyc - last_rd); end
          if (cyc - last_rd == T_CCD_L) n_tight_ccd++;
        end
        last_rd = cyc;
        rd_cycles.push_back(cyc);
      end
      default: ;
    endcase
    if (rst_n && line_valid) begin
      logic [28:0] a;
      longint t;
      a = exp_lines.pop_front();
      t = rd_cycles.pop_front();
      checks += 2;
      if (line_data !== u_dram.read_line(a)) begin failures++; $display("FAIL data for line %h", a); end
      if (cyc - t != T_CL + BEATS_PER_LINE + 1) begin
        failures++; $display("FAIL RD->line %0d", cyc - t);
      end
    end
  end

  task automatic send(logic [1:0] bg, logic [1:0] ba, logic [15:0] row,
                      logic [9:0] col, int nl, bit want_rd);
    int b;
    dram_req_t r;
    b = {bg, ba};
    r = '0;
    r.daddr.bg = bg; r.daddr.ba = ba; r.daddr.row = row; r.daddr.col = col;
    if (open_b[b] && row_b[b] != row) begin r.tags.pre = 1; exp_pre++; end
    if (!open_b[b] || row_b[b] != row) begin r.tags.act = 1; exp_act++; end
    r.tags.rd = want_rd;
    r.nlines  = want_rd ? 3'(nl) : 3'd0;
    open_b[b] = 1; row_b[b] = row;
    if (want_rd) for (int i = 0; i < nl; i++) begin
      exp_rd++;
      exp_lines.push_back({2'd0, bg, ba, row, 7'(col[9:3] + 7'(i))});
    end
    if (!r.tags.pre && !r.tags.act && !r.tags.rd) return;
    req = r;
    req_valid = 1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    #5000000 $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    // one vector of two bursts into a closed bank: ACT, RD Col, RD Col+8
    send(2'd1, 2'd2, 16'h00a5, 10'd64, 2, 1);
    for (int n = 0; n < 300; n++) begin
      send(2'($urandom_range(0, 1)), 2'($urandom_range(0, 1)),
           16'($urandom_range(0, 2)), 10'(8 * $urandom_range(0, 100)),
           $urandom_range(1, MAX_VSIZE), $urandom_range(0, 7) != 0);
      if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 60)) @(negedge clk);
    end
    while (!idle || exp_lines.size() != 0) @(negedge clk);
    repeat (40) @(negedge clk);
    checks += 5;
    if (u_dram.violations != 0) begin failures++; $display("FAIL %0d DDR4 violations", u_dram.violations); end
    if (u_dram.n_act != exp_act) begin failures++; $display("FAIL ACT count %0d exp %0d", u_dram.n_act, exp_act); end
    if (u_dram.n_pre != exp_pre) begin failures++; $display("FAIL PRE count %0d exp %0d", u_dram.n_pre, exp_pre); end
    if (u_dram.n_rd != exp_rd) begin failures++; $display("FAIL RD count %0d exp %0d", u_dram.n_rd, exp_rd); end
    if (n_tight_rcd == 0 || n_tight_ccd == 0) begin
      failures++; $display("FAIL spacing never at its minimum (rcd %0d ccd %0d)", n_tight_rcd, n_tight_ccd);
    end
    $display("ACT %0d PRE %0d RD %0d", exp_act, exp_pre, exp_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
