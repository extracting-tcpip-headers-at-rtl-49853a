// p4_deparser -- rebuilds packets for the host and inserts the summary packet.
//
// What it does: takes the per-packet records (ctrl_meta_t) from the control
// block and the buffered packet beats, in the same packet order.
//   * replace = 0: the packet is sent on unchanged. The pipeline never alters
//     a header, so re-emitting the parsed headers followed by the rest of the
//     packet is the same as forwarding the original bytes, which is what this
//     block does.
//   * replace = 1: the packet's beats are dropped and the summary packet is
//     sent instead:
//         bytes 0..5    destination MAC 66:77:88:99:aa:bb
//         bytes 6..11   source MAC      00:11:22:33:44:55
//         bytes 12..13  ether type 0x1234 (custom protocol)
//         byte  14      N_P, the number of address pairs (0x96 for 150)
//         bytes 15..    N_P pairs of 8 bytes: source IPv4, destination IPv4
//     15 + 8*N_P bytes in all (1215 bytes for N_P = 150).
//
// How it works: the summary is written into a beat-ordered buffer when the
// control block strobes sum_load (the wide 8*N_P-byte bus from the pool);
// sum_free tells the control block the buffer may be loaded. While a replaced
// packet is handled, the dropped input beats are drained and the summary beats
// are sent in parallel; the record is retired when both are done, and the
// buffer is then free again.
//
// Interface: meta_* record queue head, d_* packet-buffer head, m_* output
// stream (to the host DMA). All valid/ready; bytes in lane order, lane 0 first.
//
// Timing: forwarding is combinational from the packet buffer, one beat per
// clock, so back-to-back packets (including one-beat packets) pass at full
// rate. A summary packet takes ceil((15+8*N_P)/(DATA_W/8)) beats, 19 at the
// defaults; a replaced packet retires after max(its beats, summary beats)
// clocks.
//
// The summary layout follows the receive capture of a summary packet and the
// text around it; the stream width, the buffering and the drop-while-sending
// order are this design's.
module p4_deparser
  import he_pkg::*;
#(
  parameter int unsigned N_P    = 150,
  parameter int unsigned DATA_W = AXIS_DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // per-packet records
  input  logic                meta_valid,
  output logic                meta_ready,
  input  ctrl_meta_t          meta,
  // buffered packet beats
  input  logic                d_valid,
  output logic                d_ready,
  input  logic [DATA_W-1:0]   d_tdata,
  input  logic [DATA_W/8-1:0] d_tkeep,
  input  logic                d_tlast,
  // summary load from the control block
  input  logic                sum_load,
  output logic                sum_free,
  input  logic [64*N_P-1:0]   sum_pool,
  // packet stream out
  output logic                m_valid,
  input  logic                m_ready,
  output logic [DATA_W-1:0]   m_tdata,
  output logic [DATA_W/8-1:0] m_tkeep,
  output logic                m_tlast
);

  localparam int unsigned KB        = DATA_W / 8;
  localparam int unsigned SUM_BYTES = SUMMARY_HDR_BYTES + PAIR_BYTES * N_P;
  localparam int unsigned SUM_BEATS = (SUM_BYTES + KB - 1) / KB;
  localparam int unsigned LAST_KEEP = SUM_BYTES - (SUM_BEATS - 1) * KB;
  localparam int unsigned IDX_W     = (SUM_BEATS > 1) ? $clog2(SUM_BEATS) : 1;

  logic [DATA_W-1:0] sum_beats_q [SUM_BEATS];
  logic              sum_full_q;
  logic [IDX_W-1:0]  out_idx_q;
  logic              out_done_q, in_done_q;

  logic [8*SUM_BYTES-1:0] sum_vec;   // summary packet, byte 0 in the MSBs
  logic                   replacing, sum_last, m_fire, in_done_now, out_done_now;

  assign sum_vec  = {SUMMARY_DST_MAC, SUMMARY_SRC_MAC, SUMMARY_ETYPE, 8'(N_P), sum_pool};
  assign sum_free = !sum_full_q;

  assign replacing = meta_valid && meta.replace;
  assign sum_last  = (out_idx_q == IDX_W'(SUM_BEATS - 1));

  always_comb begin
    m_valid    = 1'b0;
    m_tdata    = '0;
    m_tkeep    = '0;
    m_tlast    = 1'b0;
    d_ready    = 1'b0;
    if (meta_valid && !meta.replace) begin
      m_valid = d_valid;
      m_tdata = d_tdata;
      m_tkeep = d_tkeep;
      m_tlast = d_tlast;
      d_ready = m_ready;
    end else if (replacing) begin
      m_valid = !out_done_q;
      m_tdata = sum_beats_q[out_idx_q];
      m_tkeep = sum_last ? {KB{1'b1}} >> (KB - LAST_KEEP) : {KB{1'b1}};
      m_tlast = sum_last;
      d_ready = !in_done_q;
    end
  end

  assign m_fire       = m_valid && m_ready;
  assign in_done_now  = in_done_q || (d_valid && d_ready && d_tlast);
  assign out_done_now = out_done_q || (m_fire && sum_last);
  assign meta_ready   = meta_valid && (meta.replace ? (in_done_now && out_done_now)
                                                    : (d_valid && m_ready && d_tlast));

  // Summary buffer, rearranged from wire order into lane-ordered beats.
  always_ff @(posedge clk) begin
    if (sum_load) begin
      for (int unsigned k = 0; k < SUM_BEATS; k++) begin
        for (int unsigned j = 0; j < KB; j++) begin
          if (k * KB + j < SUM_BYTES)
            sum_beats_q[k][8*j +: 8] <= sum_vec[8*(SUM_BYTES - 1 - (k * KB + j)) +: 8];
          else
            sum_beats_q[k][8*j +: 8] <= 8'h00;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_full_q <= 1'b0;
      out_idx_q  <= '0;
      out_done_q <= 1'b0;
      in_done_q  <= 1'b0;
    end else begin
      if (replacing && meta_ready) begin
        sum_full_q <= 1'b0;
        out_idx_q  <= '0;
        out_done_q <= 1'b0;
        in_done_q  <= 1'b0;
      end else if (replacing) begin
        if (m_fire && !sum_last) out_idx_q <= out_idx_q + 1'b1;
        out_done_q <= out_done_now;
        in_done_q  <= in_done_now;
      end
      if (sum_load) sum_full_q <= 1'b1;
    end
  end

  // A summary is loaded only into a free buffer, and a replaced packet's
  // record reaches the head only after its summary was loaded.
  assert property (@(posedge clk) disable iff (!rst_n) sum_load |-> !sum_full_q);
  assert property (@(posedge clk) disable iff (!rst_n) replacing |-> sum_full_q);

endmodule
