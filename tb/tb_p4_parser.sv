// tb_p4_parser -- test of the packet parser.
//
// Frames of every kind the builder knows (TCP with and without options, UDP,
// other IPv4 protocol, non-IPv4, frames cut inside the IPv4 or TCP header,
// IPv4 hdr_len of 4) are sent through the parser. For each frame the header
// record is compared with what the builder says a correct parser must find:
// valid bits, reject flag, ether type, addresses, protocol, option lengths and
// ports. The pass-through stream is compared beat by beat with the input.
// A first phase with both outputs always ready checks the timing: a beat per
// clock, and each record handed over one clock after the beat that completed
// it (the last beat, or the third 64-byte beat of a longer frame). A second
// phase adds random back-pressure on both outputs.
`timescale 1ns/1ps
module tb_p4_parser;
  import he_pkg::*;

  `include "he_tb_common.svh"

  localparam int unsigned DW = 512;
  localparam int unsigned KB = DW / 8;
  localparam int unsigned N_TIMED = 200;
  localparam int unsigned N_RAND  = 400;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          s_valid = 1'b0, s_ready, s_last = 1'b0;
  logic [DW-1:0] s_data = '0;
  logic [KB-1:0] s_keep = '0;
  logic          m_valid, m_ready = 1'b1, m_last;
  logic [DW-1:0] m_data;
  logic [KB-1:0] m_keep;
  logic          meta_valid, meta_ready = 1'b1;
  headers_t      meta;

  always #2 clk = ~clk;

  p4_parser dut (
    .clk(clk), .rst_n(rst_n),
    .s_valid(s_valid), .s_ready(s_ready), .s_tdata(s_data), .s_tkeep(s_keep), .s_tlast(s_last),
    .m_valid(m_valid), .m_ready(m_ready), .m_tdata(m_data), .m_tkeep(m_keep), .m_tlast(m_last),
    .meta_valid(meta_valid), .meta_ready(meta_ready), .meta_hdr(meta)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  pkt_info_t exp_info [$];
  bytes_t    exp_pkt  [$];
  longint    exp_cyc  [$];
  logic      timed = 1'b1;
  int        n_meta = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: record %0d: %s", n_meta, what);
    end
  endtask

  // Called and returning just after a falling edge.
  task automatic send(bytes_t pkt, bit gaps);
    int nb;
    logic acc;
    nb = (pkt.size() + KB - 1) / KB;
    for (int k = 0; k < nb; k++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        s_valid = 1'b0;
        @(negedge clk);
      end
      s_valid = 1'b1;
      for (int j = 0; j < KB; j++) begin
        s_data[8*j +: 8] = (k*KB + j < pkt.size()) ? pkt[k*KB + j] : 8'h00;
        s_keep[j]        = (k*KB + j < pkt.size());
      end
      s_last = (k == nb - 1);
      forever begin
        #1;
        acc = s_ready;
        @(negedge clk);
        if (acc) break;
      end
      // accepted at the edge where cyc (before its update) was cyc-1
      if (k == ((nb < 3) ? nb - 1 : 2)) exp_cyc.push_back(cyc);
    end
    s_valid = 1'b0;
  endtask

  // pass-through beats: the output beat must be the input beat
  always @(posedge clk) begin
    if (rst_n && m_valid) begin
      checks++;
      if (!s_valid || m_data != s_data || m_keep != s_keep || m_last != s_last) begin
        failures++; $display("FAIL: pass-through beat differs");
      end
    end
    if (rst_n && timed && s_valid) begin
      checks++;
      if (!s_ready) begin failures++; $display("FAIL: stalled with both outputs ready"); end
    end
  end

  // header records
  always @(posedge clk) begin
    if (rst_n && meta_valid && meta_ready) begin
      pkt_info_t e;
      bytes_t    p;
      longint    c;
      int        l4;
      e = exp_info.pop_front();
      p = exp_pkt.pop_front();
      c = exp_cyc.pop_front();
      if (timed) check(cyc == c, $sformatf("handed over at clock %0d, expected %0d", cyc, c));
      check(meta.eth_valid == (p.size() >= 14), "eth_valid");
      if (p.size() >= 14) check(meta.eth.ether_type == {p[12], p[13]}, "ether_type");
      check(meta.eth.dst_addr == {p[0], p[1], p[2], p[3], p[4], p[5]}, "dst mac");
      check(meta.ipv4_valid == e.is_ip, "ipv4_valid");
      check(meta.tcp_valid == e.is_tcp, "tcp_valid");
      check(meta.udp_valid == e.is_udp, "udp_valid");
      check(meta.parser_error == e.error, "parser_error");
      if (e.is_ip) begin
        check(meta.ipv4.src_addr == e.src, "ipv4 src");
        check(meta.ipv4.dst_addr == e.dst, "ipv4 dst");
        check(meta.ipv4.hdr_len == 4'(e.ihl), "hdr_len");
        check(meta.ipv4.protocol == p[23], "protocol");
        check(int'(meta.ipv4opt_bytes) == 4 * (e.ihl - 5), "ipv4 option length");
      end
      if (e.is_tcp) begin
        check(meta.tcp.src_port == e.sport && meta.tcp.dst_port == e.dport, "tcp ports");
        check(int'(meta.tcp.data_offset) == e.doff, "data offset");
        check(int'(meta.tcpopt_bytes) == 4 * (e.doff - 5), "tcp option length");
        l4 = 14 + 4 * e.ihl;
        check(meta.tcp.window == {p[l4+14], p[l4+15]}, "tcp window");
      end
      if (e.is_udp) begin
        check(meta.udp.src_port == e.sport && meta.udp.dst_port == e.dport, "udp ports");
      end
      n_meta++;
    end
  end

  always @(negedge clk) begin
    if (!timed) begin
      m_ready    = ($urandom_range(0, 3) != 0);
      meta_ready = ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t    p;
    pkt_info_t inf;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // every kind at least once, then random kinds; back-to-back, all ready
    for (int i = 0; i < N_TIMED + N_RAND; i++) begin
      if (i == N_TIMED) begin
        while (n_meta < N_TIMED) @(negedge clk);
        timed = 1'b0;
      end
      p = make_pkt((i < 8) ? pkt_kind_e'(i) : rnd_kind(), inf);
      exp_info.push_back(inf);
      exp_pkt.push_back(p);
      send(p, i >= N_TIMED);
    end
    while (n_meta < N_TIMED + N_RAND) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_info.size() != 0) begin failures++; $display("FAIL: records missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
