// he_tb_common.svh -- packet builder shared by the testbenches, included in
// the body of each testbench module.
//
// make_pkt builds one random Ethernet frame of a chosen kind and returns, next
// to the bytes, what a correct parser must find in it (pkt_info_t). It is
// written from the header layouts alone (Ethernet II, IPv4 per RFC 791, TCP per
// RFC 793, UDP per RFC 768) and shares no code with the design.
  typedef logic [7:0] bytes_t [$];

  typedef enum int {
    K_TCP,        // IPv4/TCP, options of either header in one case out of three
    K_UDP,        // IPv4/UDP
    K_OTHER,      // IPv4, protocol 1
    K_NONIP,      // ether type 0x86dd
    K_CUT_IP,     // ether type 0x0800, frame ends inside the IPv4 header
    K_CUT_TCP,    // IPv4/TCP, frame ends inside the TCP header
    K_MIN_TCP,    // 60-byte IPv4/TCP frame without options
    K_BAD_IHL     // IPv4 with hdr_len 4
  } pkt_kind_e;

  typedef struct {
    pkt_kind_e   kind;
    logic        is_ip;       // parser must mark hdr.ipv4 valid
    logic        is_tcp;
    logic        is_udp;
    logic        error;       // parser must reject
    int          ihl;
    int          doff;
    logic [31:0] src;
    logic [31:0] dst;
    logic [15:0] sport;
    logic [15:0] dport;
  } pkt_info_t;

  function automatic bytes_t rnd_bytes(int n);
    bytes_t b;
    for (int i = 0; i < n; i++) b.push_back(8'($urandom));
    return b;
  endfunction

  function automatic bytes_t make_pkt(pkt_kind_e kind, output pkt_info_t info);
    bytes_t b;
    int pay, l4;
    logic [7:0] proto;
    info.kind   = kind;
    info.is_ip  = 1'b0;
    info.is_tcp = 1'b0;
    info.is_udp = 1'b0;
    info.error  = 1'b0;
    info.ihl    = 0;
    info.doff   = 0;
    info.src    = $urandom;
    info.dst    = $urandom;
    info.sport  = 16'($urandom);
    info.dport  = 16'($urandom);
    b = rnd_bytes(12);                               // MAC addresses
    if (kind == K_NONIP) begin
      b.push_back(8'h86); b.push_back(8'hdd);
      b = {b, rnd_bytes(46 + $urandom_range(0, 300))};
      return b;
    end
    b.push_back(8'h08); b.push_back(8'h00);
    info.ihl  = (kind == K_MIN_TCP) ? 5 : (kind == K_BAD_IHL) ? 4 :
                (($urandom_range(0, 2) == 0) ? $urandom_range(6, 15) : 5);
    info.doff = (kind == K_MIN_TCP) ? 5 : (($urandom_range(0, 2) == 0) ? $urandom_range(6, 15) : 5);
    proto = (kind == K_UDP) ? 8'd17 : (kind == K_OTHER) ? 8'd1 : 8'd6;
    b.push_back({4'd4, 4'(info.ihl)});
    b = {b, rnd_bytes(8)};                           // tos, length, id, flags, ttl
    b.push_back(proto);
    b = {b, rnd_bytes(2)};                           // checksum
    for (int i = 3; i >= 0; i--) b.push_back(info.src[8*i +: 8]);
    for (int i = 3; i >= 0; i--) b.push_back(info.dst[8*i +: 8]);
    if (kind == K_BAD_IHL) begin
      info.error = 1'b1;
      b = {b, rnd_bytes(40)};
      return b;
    end
    b = {b, rnd_bytes((info.ihl - 5) * 4)};          // IPv4 options
    l4 = 14 + 4 * info.ihl;
    if (kind == K_CUT_IP) begin
      info.error = 1'b1;
      b = b[0 : $urandom_range(14, l4 - 1) - 1];
      return b;
    end
    info.is_ip = 1'b1;
    if (kind == K_TCP || kind == K_CUT_TCP || kind == K_MIN_TCP) begin
      b.push_back(info.sport[15:8]); b.push_back(info.sport[7:0]);
      b.push_back(info.dport[15:8]); b.push_back(info.dport[7:0]);
      b = {b, rnd_bytes(8)};                         // sequence, acknowledgement
      b.push_back({4'(info.doff), 4'd0});
      b = {b, rnd_bytes(7 + (info.doff - 5) * 4)};   // flags .. urgent, options
      if (kind == K_CUT_TCP) begin
        info.error = 1'b1;
        b = b[0 : $urandom_range(l4, l4 + 4 * info.doff - 1) - 1];
        return b;
      end
      info.is_tcp = 1'b1;
    end else if (kind == K_UDP) begin
      b.push_back(info.sport[15:8]); b.push_back(info.sport[7:0]);
      b.push_back(info.dport[15:8]); b.push_back(info.dport[7:0]);
      b = {b, rnd_bytes(4)};
      info.is_udp = 1'b1;
    end
    pay = (kind == K_MIN_TCP) ? 0 :
          (($urandom_range(0, 9) == 0) ? $urandom_range(0, 1518) : $urandom_range(0, 200));
    b = {b, rnd_bytes(pay)};
    while (b.size() < 60) b.push_back(8'h00);        // minimum frame
    if (b.size() > 1518) b = b[0:1517];
    return b;
  endfunction

  // Random kind for mixed traffic.
  function automatic pkt_kind_e rnd_kind();
    int r;
    r = $urandom_range(0, 19);
    return (r <= 7) ? K_TCP : (r <= 11) ? K_UDP : (r <= 13) ? K_OTHER : (r <= 15) ? K_NONIP :
           (r == 16) ? K_CUT_IP : (r <= 18) ? K_CUT_TCP : K_BAD_IHL;
  endfunction

  // Summary packet for a list of {src, dst} pairs.
  function automatic bytes_t summary_pkt(logic [63:0] pairs [$], int np);
    bytes_t b;
    b = '{8'h66, 8'h77, 8'h88, 8'h99, 8'haa, 8'hbb, 8'h00, 8'h11, 8'h22, 8'h33, 8'h44, 8'h55,
          8'h12, 8'h34};
    b.push_back(8'(np));
    foreach (pairs[i]) for (int k = 7; k >= 0; k--) b.push_back(pairs[i][8*k +: 8]);
    return b;
  endfunction
