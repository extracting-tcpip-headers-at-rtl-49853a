// header_mem_pool -- on-chip store of extracted address pairs (the stateful extern).
//
// What it does: keeps the (source IPv4, destination IPv4) pair of up to N_P
// packets. Each write appends one pair. When N_P pairs are held the pool is
// full; a flush hands all of them over and empties the pool for the next round.
//
// How it works: an N_P x 64-bit memory written at the fill count, one entry per
// write. The whole memory is also presented as one flat 8*N_P-byte vector, the
// wide bus over which the summary packet's payload leaves the pool. Because all
// entries are read in the same cycle this memory maps to registers, not to a
// block RAM; the source says both that the pairs are kept in block RAM and that
// 8*N_P bytes cross the bus to the packet pipeline, and this design follows the
// wide bus.
//
// Interface:
//   wr_en/wr_src/wr_dst  append a pair (ignored, and flagged by an assertion,
//                        while full)
//   flush                empty the pool (only while full)
//   full, count          fill state
//   pool                 flat contents: pair i occupies bytes 8i..8i+7 counted
//                        from the MSB end, source address first, each address
//                        in network byte order, i.e. the summary payload as it
//                        goes on the wire.
//
// Timing: a write or flush takes effect at the next clock edge; full and pool
// are registered state.
//
// N_P = 150 and the 8-byte pair follow the source; source-before-destination
// order inside a pair and the write/flush interface are this design's choices.
module header_mem_pool #(
  parameter int unsigned N_P = 150
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [31:0]              wr_src,
  input  logic [31:0]              wr_dst,
  input  logic                     flush,
  output logic                     full,
  output logic [$clog2(N_P+1)-1:0] count,
  output logic [64*N_P-1:0]        pool
);

  localparam int unsigned CNT_W = $clog2(N_P + 1);
  localparam int unsigned IDX_W = (N_P > 1) ? $clog2(N_P) : 1;

  logic [63:0] mem [N_P];

  assign full = (count == CNT_W'(N_P));

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[count[IDX_W-1:0]] <= {wr_src, wr_dst};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (flush) begin
      count <= '0;
    end else if (wr_en && !full) begin
      count <= count + 1'b1;
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N_P; i++) begin
      pool[64*(N_P-1-i) +: 64] = mem[i];
    end
  end

  // A pair offered to a full pool would be lost; a flush of a partial pool
  // would send stale entries.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  assert property (@(posedge clk) disable iff (!rst_n) flush |-> full);

endmodule
