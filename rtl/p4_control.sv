// p4_control -- P4 processing block between parser and deparser.
//
// What it does: for each packet's header record it calls the header_mem_pool
// extern, which it instantiates. An IPv4 packet (hdr.ipv4 valid) whose pair
// finds room in the pool has its pair stored and is forwarded. An IPv4 packet
// that arrives when the pool already holds N_P pairs is marked for
// replacement: the pool's N_P pairs are handed to the deparser on the wide
// summary bus, the pool is emptied, and the packet itself is dropped by the
// deparser, which sends the summary packet in its place. So out of every
// N_P + 1 IPv4 packets, N_P are forwarded and one is replaced, the drop rate of
// 1/(N_P+1) the source gives. The replaced packet's own pair is not recorded.
// Packets without a valid IPv4 header are forwarded and do not count.
//
// How it works: a single combinational decision per record. A replacement
// needs the deparser's summary buffer to be free (sum_free); while it is not,
// the record waits (a summary stall) and the parser behind it backs up.
//
// Interface: in_* takes one headers_t per packet; out_* gives one ctrl_meta_t
// ({replace, headers}) per packet to the deparser's record queue; sum_load
// strobes the wide sum_pool vector into the deparser's summary buffer.
//
// Timing: zero added latency: a record passes in the cycle it arrives if the
// record queue has room; pool writes and flushes land at the next edge.
//
// Following the source: the extern call between parser and deparser, N_P and
// the replace-one-packet scheme. This design's choices: only IPv4 packets
// count, the replaced packet's pair is discarded, and the summary buffer
// handshake.
module p4_control
  import he_pkg::*;
#(
  parameter int unsigned N_P = 150
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  headers_t          in_hdr,
  output logic              out_valid,
  input  logic              out_ready,
  output ctrl_meta_t        out_meta,
  output logic              sum_load,
  input  logic              sum_free,
  output logic [64*N_P-1:0] sum_pool
);

  logic                     pool_full;
  logic [$clog2(N_P+1)-1:0] pool_count;
  logic                     is_ip, need_replace, fire;

  assign is_ip        = in_hdr.ipv4_valid;
  assign need_replace = is_ip && pool_full;

  assign out_valid = in_valid && (!need_replace || sum_free);
  assign in_ready  = out_ready && (!need_replace || sum_free);
  assign fire      = in_valid && in_ready;

  assign out_meta.replace = need_replace;
  assign out_meta.hdr     = in_hdr;
  assign sum_load         = fire && need_replace;

  header_mem_pool #(.N_P(N_P)) u_pool (
    .clk    (clk),
    .rst_n  (rst_n),
    .wr_en  (fire && is_ip && !pool_full),
    .wr_src (in_hdr.ipv4.src_addr),
    .wr_dst (in_hdr.ipv4.dst_addr),
    .flush  (sum_load),
    .full   (pool_full),
    .count  (pool_count),
    .pool   (sum_pool)
  );

  // The fill count never passes N_P.
  assert property (@(posedge clk) disable iff (!rst_n) pool_count <= ($bits(pool_count))'(N_P));

endmodule
