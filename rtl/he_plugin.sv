// he_plugin -- header-extraction plugin for the 250 MHz user box of a 100G NIC shell.
//
// What it does: sits on the receive path between the Ethernet MAC and the host
// DMA engine. Every received packet is parsed (ethernet / IPv4 with options /
// TCP with options or UDP). The IPv4 source and destination addresses of IPv4
// packets are collected in an on-chip pool; after N_P of them, the next IPv4
// packet is dropped and a summary packet carrying the N_P address pairs
// (ether type 0x1234) goes to the host in its place. All other packets reach
// the host unchanged. The host builds the traffic matrix from the summaries.
//
// How it works (data flow):
//   s_axis -> p4_parser --beats--> packet buffer (sync_fifo) ----------+
//                 |                                                    v
//                 +--headers--> p4_control --records--> record queue -> p4_deparser -> m_axis
//                                  | (header_mem_pool)                 ^
//                                  +--- 8*N_P-byte summary bus --------+
// The parser copies the stream into the packet buffer while it extracts the
// headers of the first beats; the control block calls the pool for each
// record and decides forward/replace; the deparser pairs each record with its
// packet's beats and forwards or replaces the packet.
//
// Interface: s_axis_* is the receive stream from the MAC side, m_axis_* the
// stream to the DMA (card-to-host) side; tdata/tkeep/tlast with valid/ready,
// byte 0 of a packet in lane 0, tkeep contiguous from lane 0. Back-pressure
// from m_axis_tready propagates to s_axis_tready.
//
// Timing: one DATA_W-bit beat per clock in and out (128 Gb/s at 250 MHz and
// 512 bits). A packet's header record exists once its third beat (or its
// last, if shorter) has been accepted, and its first beat leaves two clocks
// after that when nothing is waiting. A summary packet takes 19 beats at the
// defaults; when it replaces a shorter packet the packets behind it wait for
// the difference (first in the buffers, then at the input), and when it
// replaces a longer one the output idles while the rest is dropped.
//
// The block structure (parser, extern memory pool between parser and
// deparser, deparser) and N_P = 150 follow the source; the buffers, their
// depths, the stream width and the handshakes are this design's choices.
module he_plugin
  import he_pkg::*;
#(
  parameter int unsigned N_P        = 150,
  parameter int unsigned DATA_W     = AXIS_DATA_W,
  parameter int unsigned PKT_DEPTH  = 32,
  parameter int unsigned META_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // receive stream from the MAC side
  input  logic                s_axis_tvalid,
  output logic                s_axis_tready,
  input  logic [DATA_W-1:0]   s_axis_tdata,
  input  logic [DATA_W/8-1:0] s_axis_tkeep,
  input  logic                s_axis_tlast,
  // stream to the host DMA
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  output logic [DATA_W-1:0]   m_axis_tdata,
  output logic [DATA_W/8-1:0] m_axis_tkeep,
  output logic                m_axis_tlast
);

  localparam int unsigned KB     = DATA_W / 8;
  localparam int unsigned BEAT_W = DATA_W + KB + 1;

  // parser -> packet buffer
  logic              pb_wr_valid, pb_wr_ready;
  logic [DATA_W-1:0] pb_wr_tdata;
  logic [KB-1:0]     pb_wr_tkeep;
  logic              pb_wr_tlast;
  // packet buffer -> deparser
  logic              pb_rd_valid, pb_rd_ready;
  logic [DATA_W-1:0] pb_rd_tdata;
  logic [KB-1:0]     pb_rd_tkeep;
  logic              pb_rd_tlast;
  // parser -> control
  logic              hdr_valid, hdr_ready;
  headers_t          hdr;
  // control -> record queue -> deparser
  logic              rec_wr_valid, rec_wr_ready, rec_rd_valid, rec_rd_ready;
  ctrl_meta_t        rec_wr, rec_rd;
  // summary bus
  logic              sum_load, sum_free;
  logic [64*N_P-1:0] sum_pool;

  p4_parser #(.DATA_W(DATA_W)) u_parser (
    .clk        (clk),
    .rst_n      (rst_n),
    .s_valid    (s_axis_tvalid),
    .s_ready    (s_axis_tready),
    .s_tdata    (s_axis_tdata),
    .s_tkeep    (s_axis_tkeep),
    .s_tlast    (s_axis_tlast),
    .m_valid    (pb_wr_valid),
    .m_ready    (pb_wr_ready),
    .m_tdata    (pb_wr_tdata),
    .m_tkeep    (pb_wr_tkeep),
    .m_tlast    (pb_wr_tlast),
    .meta_valid (hdr_valid),
    .meta_ready (hdr_ready),
    .meta_hdr   (hdr)
  );

  sync_fifo #(.WIDTH(BEAT_W), .DEPTH(PKT_DEPTH)) u_pkt_buf (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_valid (pb_wr_valid),
    .wr_ready (pb_wr_ready),
    .wr_data  ({pb_wr_tlast, pb_wr_tkeep, pb_wr_tdata}),
    .rd_valid (pb_rd_valid),
    .rd_ready (pb_rd_ready),
    .rd_data  ({pb_rd_tlast, pb_rd_tkeep, pb_rd_tdata})
  );

  p4_control #(.N_P(N_P)) u_control (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (hdr_valid),
    .in_ready  (hdr_ready),
    .in_hdr    (hdr),
    .out_valid (rec_wr_valid),
    .out_ready (rec_wr_ready),
    .out_meta  (rec_wr),
    .sum_load  (sum_load),
    .sum_free  (sum_free),
    .sum_pool  (sum_pool)
  );

  sync_fifo #(.WIDTH($bits(ctrl_meta_t)), .DEPTH(META_DEPTH)) u_rec_q (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_valid (rec_wr_valid),
    .wr_ready (rec_wr_ready),
    .wr_data  (rec_wr),
    .rd_valid (rec_rd_valid),
    .rd_ready (rec_rd_ready),
    .rd_data  (rec_rd)
  );

  p4_deparser #(.N_P(N_P), .DATA_W(DATA_W)) u_deparser (
    .clk        (clk),
    .rst_n      (rst_n),
    .meta_valid (rec_rd_valid),
    .meta_ready (rec_rd_ready),
    .meta       (rec_rd),
    .d_valid    (pb_rd_valid),
    .d_ready    (pb_rd_ready),
    .d_tdata    (pb_rd_tdata),
    .d_tkeep    (pb_rd_tkeep),
    .d_tlast    (pb_rd_tlast),
    .sum_load   (sum_load),
    .sum_free   (sum_free),
    .sum_pool   (sum_pool),
    .m_valid    (m_axis_tvalid),
    .m_ready    (m_axis_tready),
    .m_tdata    (m_axis_tdata),
    .m_tkeep    (m_axis_tkeep),
    .m_tlast    (m_axis_tlast)
  );

  // AXI4-Stream: once valid, a beat holds until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid &&
                   $stable({m_axis_tdata, m_axis_tkeep, m_axis_tlast}));

endmodule
