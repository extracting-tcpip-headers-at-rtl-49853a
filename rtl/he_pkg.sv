// he_pkg -- shared types and constants of the header-extraction plugin.
//
// The plugin sits in the 250 MHz user box of a 100G FPGA NIC shell, between the
// Ethernet MAC (receive side) and the host DMA engine. It parses every received
// packet, keeps the IPv4 source/destination address pair of each IPv4 packet in
// on-chip memory and, once N_p pairs have been collected, replaces the next IPv4
// packet by a "summary" packet that carries all N_p pairs to the host.
//
// This package holds:
//   * the P4 header layouts (ethernet, ipv4, tcp, udp) as packed structs whose
//     first field is the first byte on the wire, so that a big-endian byte
//     vector can be cast straight into them;
//   * the parser state enumeration, one state per P4 parser state;
//   * the constants of the parse graph (IPv4 ethertype, TCP and UDP protocol
//     numbers) and of the summary packet (MAC addresses, ethertype 0x1234, the
//     count byte), as the receive capture of a summary packet shows them;
//   * the metadata records that travel from parser to control to deparser.
//
// The 512-bit stream width is the usual width of the shell's 250 MHz user
// interface; the source does not state it, so it is a choice of this design.
package he_pkg;

  // ---------------------------------------------------------------- stream
  localparam int unsigned AXIS_DATA_W = 512;

  // ---------------------------------------------------------------- parse graph
  localparam logic [15:0] IPV4_TYPE = 16'h0800;
  localparam logic [7:0]  TCP_PROT  = 8'd6;
  localparam logic [7:0]  UDP_PROT  = 8'd17;

  localparam int unsigned ETH_BYTES  = 14;
  localparam int unsigned IPV4_BYTES = 20;
  localparam int unsigned TCP_BYTES  = 20;
  localparam int unsigned UDP_BYTES  = 8;
  // Longest header stack the parser can extract: ethernet + 60-byte IPv4
  // header (hdr_len = 15) + 60-byte TCP header (dataOffset = 15).
  localparam int unsigned MAX_HDR_BYTES = ETH_BYTES + 60 + 60;

  // ---------------------------------------------------------------- summary packet
  localparam logic [47:0] SUMMARY_DST_MAC = 48'h6677_8899_aabb;
  localparam logic [47:0] SUMMARY_SRC_MAC = 48'h0011_2233_4455;
  localparam logic [15:0] SUMMARY_ETYPE   = 16'h1234;
  // Bytes ahead of the address pairs: ethernet header plus the N_p count byte.
  localparam int unsigned SUMMARY_HDR_BYTES = ETH_BYTES + 1;
  // One address pair: 4-byte source IP followed by 4-byte destination IP.
  localparam int unsigned PAIR_BYTES = 8;

  // ---------------------------------------------------------------- headers
  typedef struct packed {
    logic [47:0] dst_addr;
    logic [47:0] src_addr;
    logic [15:0] ether_type;
  } ethernet_h;

  typedef struct packed {
    logic [3:0]  version;
    logic [3:0]  hdr_len;      // in 32-bit words
    logic [7:0]  tos;
    logic [15:0] total_len;
    logic [15:0] identification;
    logic [2:0]  flags;
    logic [12:0] frag_offset;
    logic [7:0]  ttl;
    logic [7:0]  protocol;
    logic [15:0] hdr_checksum;
    logic [31:0] src_addr;
    logic [31:0] dst_addr;
  } ipv4_h;

  typedef struct packed {
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [31:0] seq_no;
    logic [31:0] ack_no;
    logic [3:0]  data_offset;  // in 32-bit words
    logic [3:0]  res;
    logic [7:0]  flags;
    logic [15:0] window;
    logic [15:0] checksum;
    logic [15:0] urgent_ptr;
  } tcp_h;

  typedef struct packed {
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] length;
    logic [15:0] checksum;
  } udp_h;

  // Parsed header vector of one packet. Option contents stay in the packet
  // stream (they are forwarded unchanged); only their lengths are recorded.
  typedef struct packed {
    logic      eth_valid;
    logic      ipv4_valid;
    logic      tcp_valid;
    logic      udp_valid;
    logic      parser_error;   // a header the graph selected did not fit the packet
    logic [5:0] ipv4opt_bytes;
    logic [5:0] tcpopt_bytes;
    ethernet_h eth;
    ipv4_h     ipv4;
    tcp_h      tcp;
    udp_h      udp;
  } headers_t;

  // Parser states, one per state of the P4 parser.
  typedef enum logic [2:0] {
    ST_START,
    ST_PARSE_ETH,
    ST_PARSE_IPV4,
    ST_PARSE_TCP,
    ST_PARSE_UDP,
    ST_ACCEPT,
    ST_REJECT
  } parser_state_e;

  // Per-packet record handed from the control block to the deparser.
  typedef struct packed {
    logic     replace;   // drop this packet and send the summary packet instead
    headers_t hdr;
  } ctrl_meta_t;

endpackage
