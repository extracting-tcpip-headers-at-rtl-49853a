// p4_parser -- packet parser of the header-extraction plugin.
//
// What it does: for every packet on its AXI4-Stream input it extracts the
// header vector of the P4 parse graph
//     start -> parse_eth -> (ether_type 0x0800) parse_ipv4 -> ipv4 options of
//     (hdr_len-5)*32 bits -> (protocol 6) parse_tcp -> tcp options of
//     (dataOffset-5)*32 bits -> accept
//                                          (protocol 17) parse_udp -> accept
//     anything else -> accept
// and hands it on as one headers_t record per packet. The packet itself passes
// through unchanged to the output stream, which feeds the packet buffer in
// front of the deparser.
//
// How it works: the first WIN_BEATS beats of a packet (enough for the longest
// stack, ethernet + 60-byte IPv4 + 60-byte TCP) are copied into a byte window.
// On the beat that completes the window, or on the last beat of a shorter
// packet, an always_comb loop walks the parser states over the window and the
// record is registered. A header is extracted only if all of its bytes (options
// included) are inside the packet; if not, parsing stops with parser_error set
// and the header stays invalid (P4's "packet too short" reject). An IPv4
// hdr_len below 5 or a TCP dataOffset below 5 is handled the same way.
//
// Interface: s_* is the input stream (tdata, tkeep, tlast; bytes in lane order,
// lane 0 first, tkeep contiguous from lane 0). m_* is the same stream out,
// meta_* the per-packet header record, one valid/ready handshake per packet.
//
// Timing: one beat per clock when both outputs can take it. The output beat is
// combinational from the input beat; the header record is valid the cycle
// after the beat that completed the window, and stays until taken. A beat is
// accepted only while the record register is free or being emptied, so at most
// one record waits.
//
// The parse graph, the constants and the header layouts are those of the P4
// parser the design is built from; the windowed, one-record-per-packet
// implementation, the stream width and the error handling are this design's.
module p4_parser
  import he_pkg::*;
#(
  parameter int unsigned DATA_W = AXIS_DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // packet stream in (from the MAC side)
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [DATA_W-1:0]   s_tdata,
  input  logic [DATA_W/8-1:0] s_tkeep,
  input  logic                s_tlast,
  // packet stream out (to the packet buffer)
  output logic                m_valid,
  input  logic                m_ready,
  output logic [DATA_W-1:0]   m_tdata,
  output logic [DATA_W/8-1:0] m_tkeep,
  output logic                m_tlast,
  // one header record per packet
  output logic                meta_valid,
  input  logic                meta_ready,
  output headers_t            meta_hdr
);

  localparam int unsigned KB        = DATA_W / 8;
  localparam int unsigned WIN_BEATS = (MAX_HDR_BYTES + KB - 1) / KB;
  localparam int unsigned WIN_BYTES = WIN_BEATS * KB;
  localparam int unsigned IDX_W     = $clog2(WIN_BEATS + 1);
  localparam int unsigned LEN_W     = $clog2(WIN_BYTES + 1);

  logic [7:0]       win_q [WIN_BYTES];
  logic [7:0]       win_c [WIN_BYTES];
  logic [IDX_W-1:0] beat_idx_q;   // beats of the current packet seen, saturates at WIN_BEATS
  logic [LEN_W-1:0] len_q, len_c; // packet bytes held in the window
  logic             done_q;       // record of the current packet already produced

  logic     slot_free;
  logic     s_fire;
  logic     complete;
  headers_t hdr_c;

  // ------------------------------------------------------------ handshakes
  assign slot_free = !meta_valid || meta_ready;
  assign s_ready   = m_ready && slot_free;
  assign m_valid   = s_valid && slot_free;
  assign m_tdata   = s_tdata;
  assign m_tkeep   = s_tkeep;
  assign m_tlast   = s_tlast;
  assign s_fire    = s_valid && s_ready;
  assign complete  = s_fire && !done_q &&
                     (s_tlast || (beat_idx_q == IDX_W'(WIN_BEATS - 1)));

  // ------------------------------------------------------------ window
  always_comb begin
    win_c = win_q;
    len_c = len_q;
    if (beat_idx_q < IDX_W'(WIN_BEATS)) begin
      for (int unsigned j = 0; j < KB; j++) begin
        win_c[int'(beat_idx_q) * KB + j] = s_tdata[8*j +: 8];
      end
      len_c = len_q + LEN_W'($countones(s_tkeep));
    end
  end

  // 20 bytes of the window starting at byte off, first byte in the MSBs.
  function automatic logic [159:0] take20(input logic [7:0] w [WIN_BYTES], input int unsigned off);
    logic [159:0] v;
    v = '0;
    for (int unsigned i = 0; i < 20; i++) begin
      if (off + i < WIN_BYTES) v[159 - 8*i -: 8] = w[off + i];
    end
    return v;
  endfunction

  // ------------------------------------------------------------ parse graph
  always_comb begin
    parser_state_e st;
    int unsigned   off;      // byte offset of the next header
    int unsigned   opt;      // option bytes of the current header
    logic [159:0]  b;
    st    = ST_START;
    off   = 0;
    opt   = 0;
    b     = '0;
    hdr_c = '0;
    // Each pass takes one state transition; five passes reach accept/reject.
    for (int pass = 0; pass < 5; pass++) begin
      unique case (st)
        ST_START: st = ST_PARSE_ETH;
        ST_PARSE_ETH: begin
          if (int'(len_c) >= ETH_BYTES) begin
            b             = take20(win_c, 0);
            hdr_c.eth     = b[159 -: 112];
            hdr_c.eth_valid = 1'b1;
            off           = ETH_BYTES;
            st            = (hdr_c.eth.ether_type == IPV4_TYPE) ? ST_PARSE_IPV4 : ST_ACCEPT;
          end else begin
            st = ST_REJECT;
          end
        end
        ST_PARSE_IPV4: begin
          b   = take20(win_c, off);
          opt = (int'(b[155:152]) >= 5) ? (int'(b[155:152]) - 5) * 4 : 0;
          if (int'(b[155:152]) >= 5 && int'(len_c) >= off + IPV4_BYTES + opt) begin
            hdr_c.ipv4          = b;
            hdr_c.ipv4_valid    = 1'b1;
            hdr_c.ipv4opt_bytes = 6'(opt);
            off                 = off + IPV4_BYTES + opt;
            if (b[87:80] == TCP_PROT)      st = ST_PARSE_TCP;
            else if (b[87:80] == UDP_PROT) st = ST_PARSE_UDP;
            else                           st = ST_ACCEPT;
          end else begin
            st = ST_REJECT;
          end
        end
        ST_PARSE_TCP: begin
          b   = take20(win_c, off);
          opt = (int'(b[63:60]) >= 5) ? (int'(b[63:60]) - 5) * 4 : 0;
          if (int'(b[63:60]) >= 5 && int'(len_c) >= off + TCP_BYTES + opt) begin
            hdr_c.tcp          = b;
            hdr_c.tcp_valid    = 1'b1;
            hdr_c.tcpopt_bytes = 6'(opt);
            st                 = ST_ACCEPT;
          end else begin
            st = ST_REJECT;
          end
        end
        ST_PARSE_UDP: begin
          b = take20(win_c, off);
          if (int'(len_c) >= off + UDP_BYTES) begin
            hdr_c.udp       = b[159 -: 64];
            hdr_c.udp_valid = 1'b1;
            st              = ST_ACCEPT;
          end else begin
            st = ST_REJECT;
          end
        end
        ST_ACCEPT: st = ST_ACCEPT;
        default:   st = ST_REJECT;
      endcase
    end
    hdr_c.parser_error = (st == ST_REJECT);
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk) begin
    if (s_fire && beat_idx_q < IDX_W'(WIN_BEATS)) win_q <= win_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_idx_q <= '0;
      len_q      <= '0;
      done_q     <= 1'b0;
      meta_valid <= 1'b0;
      meta_hdr   <= '0;
    end else begin
      if (meta_valid && meta_ready) meta_valid <= 1'b0;
      if (complete) begin
        meta_valid <= 1'b1;
        meta_hdr   <= hdr_c;
      end
      if (s_fire) begin
        if (s_tlast) begin
          beat_idx_q <= '0;
          len_q      <= '0;
          done_q     <= 1'b0;
        end else begin
          if (beat_idx_q < IDX_W'(WIN_BEATS)) beat_idx_q <= beat_idx_q + 1'b1;
          len_q  <= len_c;
          done_q <= done_q || complete;
        end
      end
    end
  end

endmodule
