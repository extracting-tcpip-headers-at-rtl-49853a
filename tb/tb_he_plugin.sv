// tb_he_plugin -- end-to-end test of the header-extraction plugin.
//
// Random traffic (IPv4/TCP with and without IPv4 and TCP options, IPv4/UDP,
// IPv4 with another protocol, non-IPv4 frames, IPv4 frames cut short inside
// the IPv4 or the TCP header, sizes up to 1518 bytes) is sent into the plugin
// with random gaps, and the output is taken with random back-pressure. A
// reference model in this file, written from the packet format alone, predicts
// the output: every packet unchanged, except that once N_P IPv4 address pairs
// have been collected the next IPv4 packet is replaced by the summary packet
// (66:77:88:99:aa:bb, 00:11:22:33:44:55, type 0x1234, count byte, pairs).
// Every output packet is compared byte for byte.
//
// A first phase sends back-to-back one-beat packets into an always-ready sink
// and checks the rate (one beat per clock) and the latency (two clocks).
// Mechanisms counted, each must occur: replacement, IPv4 options, TCP options,
// UDP, non-IPv4, parser reject (short packet), output back-pressure, input
// stall and summary-buffer stall. N_P is 2 here so that all of them happen in
// a short run.
`timescale 1ns/1ps
module tb_he_plugin;

  `include "he_tb_common.svh"

  localparam int unsigned NP     = 2;
  localparam int unsigned DW     = 512;
  localparam int unsigned KB     = DW / 8;
  localparam int unsigned N_PKTS = 600;
  localparam int unsigned N_RATE = 40;


  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          s_valid = 1'b0, s_ready, s_last = 1'b0;
  logic [DW-1:0] s_data = '0;
  logic [KB-1:0] s_keep = '0;
  logic          m_valid, m_ready = 1'b0, m_last;
  logic [DW-1:0] m_data;
  logic [KB-1:0] m_keep;

  always #2 clk = ~clk;   // 250 MHz

  he_plugin #(.N_P(NP)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .s_axis_tkeep(s_keep), .s_axis_tlast(s_last),
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready), .m_axis_tdata(m_data),
    .m_axis_tkeep(m_keep), .m_axis_tlast(m_last)
  );

  int checks = 0, failures = 0;
  int n_replace = 0, n_ipopt = 0, n_tcpopt = 0, n_udp = 0, n_nonip = 0, n_short = 0;
  int n_bp = 0, n_in_stall = 0, n_sum_stall = 0;
  longint cyc = 0;

  bytes_t      exp_q [$];
  logic [63:0] ref_pool [$];
  int         n_out = 0;
  logic       rate_phase = 1'b1;
  longint     first_in = -1, first_out = -1, last_out = -1;

  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ reference model
  task automatic model(bytes_t pkt, logic is_ip, logic [31:0] src, logic [31:0] dst);
    if (is_ip && ref_pool.size() == NP) begin
      exp_q.push_back(summary_pkt(ref_pool, NP));
      ref_pool.delete();
    end else begin
      if (is_ip) ref_pool.push_back({src, dst});
      exp_q.push_back(pkt);
    end
  endtask

  // ------------------------------------------------------------ driver
  // Called and returning just after a falling edge; inputs change only there.
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
      if (first_in < 0) first_in = cyc - 1;
    end
    s_valid = 1'b0;
  endtask

  // ------------------------------------------------------------ monitor
  bytes_t cur, e;
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      for (int j = 0; j < KB; j++) if (m_keep[j]) cur.push_back(m_data[8*j +: 8]);
      checks++;
      if (!m_last && m_keep != '1) begin
        failures++; $display("FAIL: partial tkeep on a beat that is not the last");
      end
      if (m_last) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL: unexpected output packet of %0d bytes", cur.size());
        end else begin
          e = exp_q.pop_front();
          if (e != cur) begin
            failures++;
            $display("FAIL: packet %0d differs: got %0d bytes, expected %0d", n_out, cur.size(), e.size());
          end
          if (e.size() >= 14 && e[12] == 8'h12 && e[13] == 8'h34) n_replace++;
        end
        n_out++;
        cur.delete();
      end
    end
    if (rst_n && m_valid && !m_ready) n_bp++;
    if (rst_n && s_valid && !s_ready) n_in_stall++;
    if (rst_n && dut.u_control.in_valid && dut.u_control.need_replace && !dut.u_control.sum_free)
      n_sum_stall++;
  end

  // random back-pressure after the rate phase
  always @(negedge clk) m_ready = rate_phase ? 1'b1 : ($urandom_range(0, 3) != 0);

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    bytes_t p;
    pkt_info_t inf;
    int total_in;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    @(negedge clk);

    // rate phase: back-to-back one-beat frames, sink always ready
    for (int i = 0; i < N_RATE; i++) begin
      p = make_pkt(K_MIN_TCP, inf);
      model(p, inf.is_ip, inf.src, inf.dst);
      send(p, 1'b0);
    end
    while (n_out < N_RATE) @(posedge clk);
    checks++;
    if (first_out - first_in != 2) begin
      failures++; $display("FAIL: latency %0d clocks, expected 2", first_out - first_in);
    end
    checks++;
    if (last_out - first_out != longint'(N_RATE) - 1) begin
      failures++;
      $display("FAIL: %0d one-beat packets took %0d clocks", N_RATE, last_out - first_out + 1);
    end
    rate_phase = 1'b0;
    @(negedge clk);

    // random phase
    for (int i = 0; i < N_PKTS; i++) begin
      p = make_pkt(rnd_kind(), inf);
      if (inf.kind == K_NONIP) n_nonip++;
      if (inf.error) n_short++;
      if (inf.is_udp) n_udp++;
      if (inf.is_ip && inf.ihl > 5) n_ipopt++;
      if (inf.is_tcp && inf.doff > 5) n_tcpopt++;
      model(p, inf.is_ip, inf.src, inf.dst);
      send(p, 1'b1);
    end
    total_in = N_RATE + N_PKTS;
    while (n_out < total_in) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_out != total_in) begin
      failures++; $display("FAIL: %0d packets out, %0d expected", n_out, total_in);
    end

    $display("mechanisms: replace=%0d ipv4_opts=%0d tcp_opts=%0d udp=%0d non_ipv4=%0d short=%0d backpressure=%0d in_stall=%0d sum_stall=%0d",
             n_replace, n_ipopt, n_tcpopt, n_udp, n_nonip, n_short, n_bp, n_in_stall, n_sum_stall);
    checks += 9;
    if (n_replace == 0)   begin failures++; $display("FAIL: no replacement"); end
    if (n_ipopt == 0)     begin failures++; $display("FAIL: no IPv4 options"); end
    if (n_tcpopt == 0)    begin failures++; $display("FAIL: no TCP options"); end
    if (n_udp == 0)       begin failures++; $display("FAIL: no UDP"); end
    if (n_nonip == 0)     begin failures++; $display("FAIL: no non-IPv4"); end
    if (n_short == 0)     begin failures++; $display("FAIL: no short packet"); end
    if (n_bp == 0)        begin failures++; $display("FAIL: no back-pressure"); end
    if (n_in_stall == 0)  begin failures++; $display("FAIL: no input stall"); end
    if (n_sum_stall == 0) begin failures++; $display("FAIL: no summary stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
