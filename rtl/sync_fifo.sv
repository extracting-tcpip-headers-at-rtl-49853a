// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// What it does: buffers WIDTH-bit words, DEPTH of them, between a producer and
// a consumer with valid/ready handshakes on both sides. It is used for the
// packet buffer (stream beats) and for the per-packet record queue between
// the control block and the deparser.
//
// How it works: a circular array with read and write pointers and an occupancy
// count. The head word is shown on rd_data while rd_valid is high.
//
// Interface: wr_valid/wr_ready/wr_data in, rd_valid/rd_ready/rd_data out.
// wr_ready is low only when the FIFO is full; rd_valid is high whenever it is
// not empty.
//
// Timing: a written word can be read the cycle after it is written; a read and
// a write may happen in the same cycle, so a full-rate stream passes with one
// cycle of latency. This helper is this design's own; the source names no
// buffers.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [CNT_W-1:0] count;
  logic             wr_fire, rd_fire;

  assign wr_ready = (count != CNT_W'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_fire  = rd_valid && rd_ready;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_fire) wr_ptr <= next_ptr(wr_ptr);
      if (rd_fire) rd_ptr <= next_ptr(rd_ptr);
      unique case ({wr_fire, rd_fire})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

endmodule
