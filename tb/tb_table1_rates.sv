// tb_table1_rates -- sustained-rate test at the packet sizes of the original
// evaluation (64, 128, 256, 512, 1024 and 1518 bytes), default parameters.
//
// For each size, 400 IPv4/TCP frames (headers without options, padded with
// zeros to the size, as the evaluation padded its header-only traces) are sent
// back to back into the plugin with an always-ready sink. Every output packet
// is checked against the reference model (two 1215-byte summaries per size
// replace the 151st and 302nd frames). Checked per size:
//   * the output idles only where the design must wait: first input beat to
//     last output beat takes the output beats, plus the first packet's latency
//     (two clocks after its third beat, or its last if shorter), plus the
//     clocks in which a replaced frame longer than the 19-beat summary is
//     still being drained;
//   * the sustained packet rate at 250 MHz is at least the rate measured on the
//     original hardware, and at least 100 GbE line rate for that frame size
//     (size + 20 bytes of preamble and inter-frame gap per frame).
`timescale 1ns/1ps
module tb_table1_rates;

  `include "he_tb_common.svh"

  localparam int unsigned NP = 150;
  localparam int unsigned DW = 512;
  localparam int unsigned KB = DW / 8;
  localparam int unsigned N_PER_SIZE = 400;
  localparam int          SIZES    [6] = '{64, 128, 256, 512, 1024, 1518};
  // packet rates measured on the original hardware, packets per second
  localparam longint      PAPER_PPS[6] = '{41210656, 39790209, 35098591, 22428831, 11447680, 7746182};

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          s_valid = 1'b0, s_ready, s_last = 1'b0;
  logic [DW-1:0] s_data = '0;
  logic [KB-1:0] s_keep = '0;
  logic          m_valid, m_ready = 1'b1, m_last;
  logic [DW-1:0] m_data;
  logic [KB-1:0] m_keep;

  always #2 clk = ~clk;   // 250 MHz

  he_plugin dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .s_axis_tkeep(s_keep), .s_axis_tlast(s_last),
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready), .m_axis_tdata(m_data),
    .m_axis_tkeep(m_keep), .m_axis_tlast(m_last)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  bytes_t      exp_q [$];
  logic [63:0] ref_pool [$];
  int          n_out = 0, n_beats = 0, n_summ = 0;
  longint      first_in = -1, last_out = -1;
  bytes_t      cur, e;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic model(bytes_t pkt, logic [31:0] src, logic [31:0] dst);
    if (ref_pool.size() == NP) begin
      exp_q.push_back(summary_pkt(ref_pool, NP));
      ref_pool.delete();
    end else begin
      ref_pool.push_back({src, dst});
      exp_q.push_back(pkt);
    end
  endtask

  // Called and returning just after a falling edge.
  task automatic send(bytes_t pkt);
    int nb;
    logic acc;
    nb = (pkt.size() + KB - 1) / KB;
    for (int k = 0; k < nb; k++) begin
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

  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      last_out = cyc;
      n_beats++;
      for (int j = 0; j < KB; j++) if (m_keep[j]) cur.push_back(m_data[8*j +: 8]);
      if (m_last) begin
        e = exp_q.pop_front();
        checks++;
        if (e != cur) begin
          failures++;
          $display("FAIL: packet %0d: got %0d bytes, expected %0d", n_out, cur.size(), e.size());
        end
        if (e.size() >= 14 && e[12] == 8'h12 && e[13] == 8'h34) n_summ++;
        n_out++;
        cur.delete();
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t    p;
    pkt_info_t inf;
    longint    clocks, out_beats, expected;
    int        nb;
    real       pps, gbps, line_pps;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    for (int s = 0; s < 6; s++) begin
      first_in = -1;
      n_beats  = 0;
      n_out    = 0;
      n_summ   = 0;
      for (int i = 0; i < N_PER_SIZE; i++) begin
        p = make_pkt(K_MIN_TCP, inf);
        while (p.size() < SIZES[s]) p.push_back(8'h00);
        model(p, inf.src, inf.dst);
        send(p);
      end
      while (n_out < N_PER_SIZE) @(negedge clk);
      clocks    = last_out - first_in + 1;
      out_beats = longint'(n_beats);
      pps       = real'(N_PER_SIZE) * 250.0e6 / real'(clocks);
      gbps      = pps * real'(SIZES[s]) * 8.0 / 1.0e9;
      line_pps  = 100.0e9 / (real'(SIZES[s] + 20) * 8.0);
      $display("size %4d B: %0d clocks for %0d packets (%0d summaries), %0.1f Mpps, %0.1f Gb/s; measured on hardware %0.1f Mpps, 100GbE line rate %0.1f Mpps",
               SIZES[s], clocks, N_PER_SIZE, n_summ, pps / 1.0e6, gbps, real'(PAPER_PPS[s]) / 1.0e6,
               line_pps / 1.0e6);
      // expected: every output beat, plus the latency of the first packet (its
      // record exists after its third beat, or its last if shorter, and leaves
      // two clocks later), plus the clocks in which a replaced frame longer than
      // the 19-beat summary is still being drained
      nb       = (SIZES[s] + KB - 1) / KB;
      expected = out_beats + 2 + longint'((nb < 3) ? nb - 1 : 2) +
                 longint'(n_summ) * longint'((nb > 19) ? nb - 19 : 0);
      checks += 4;
      if (clocks != expected) begin
        failures++;
        $display("FAIL: %0d clocks for %0d output beats, expected %0d", clocks, out_beats, expected);
      end
      if (pps < real'(PAPER_PPS[s])) begin failures++; $display("FAIL: below the measured rate"); end
      if (pps < line_pps) begin failures++; $display("FAIL: below line rate"); end
      if (n_summ == 0) begin failures++; $display("FAIL: no summary packet"); end
      repeat (10) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
