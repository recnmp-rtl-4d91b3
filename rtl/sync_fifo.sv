// sync_fifo -- single-clock first-in first-out queue.
//
// Used for the instruction buffers and request queues of the processing unit.
// A word is written when wr_valid and wr_ready are both high and leaves when
// rd_valid and rd_ready are both high; rd_data always shows the oldest word
// (first-word fall-through). The storage is a plain array with read and write
// pointers; DEPTH must be a power of two. Reset empties the queue.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign count    = wptr - rptr;
  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  // A full queue never accepts and an empty one never delivers.
  always_ff @(posedge clk)
    if (rst_n) a_no_overflow: assert (count <= (AW+1)'(DEPTH));

endmodule
