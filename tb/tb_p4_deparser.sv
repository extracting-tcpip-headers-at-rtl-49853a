// tb_p4_deparser -- test of the deparser at N_P = 150, 512-bit stream.
//
// The testbench plays the record queue, the packet buffer and the control
// block. Packets of random size are queued, one in four marked for
// replacement; before a replaced packet's record is queued, a random pool of
// 150 pairs is loaded over the summary bus (only while sum_free is high). The
// output, taken with random back-pressure, is compared byte for byte with the
// reference: forwarded packets unchanged, replaced packets turned into the
// 1215-byte summary packet (66:77:88:99:aa:bb, 00:11:22:33:44:55, 0x1234,
// 0x96, pairs), which must take 19 beats. A first phase without replacements
// and with the sink always ready checks that forwarding runs at a beat per
// clock.
`timescale 1ns/1ps
module tb_p4_deparser;
  import he_pkg::*;

  `include "he_tb_common.svh"

  localparam int unsigned NP = 150;
  localparam int unsigned DW = 512;
  localparam int unsigned KB = DW / 8;
  localparam int unsigned N_TIMED = 100;
  localparam int unsigned N_RAND  = 300;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              meta_valid = 1'b0, meta_ready;
  ctrl_meta_t        meta = '0;
  logic              d_valid = 1'b0, d_ready, d_last = 1'b0;
  logic [DW-1:0]     d_data = '0;
  logic [KB-1:0]     d_keep = '0;
  logic              sum_load = 1'b0, sum_free;
  logic [64*NP-1:0]  sum_pool = '0;
  logic              m_valid, m_ready = 1'b1, m_last;
  logic [DW-1:0]     m_data;
  logic [KB-1:0]     m_keep;

  always #2 clk = ~clk;

  p4_deparser dut (
    .clk(clk), .rst_n(rst_n),
    .meta_valid(meta_valid), .meta_ready(meta_ready), .meta(meta),
    .d_valid(d_valid), .d_ready(d_ready), .d_tdata(d_data), .d_tkeep(d_keep), .d_tlast(d_last),
    .sum_load(sum_load), .sum_free(sum_free), .sum_pool(sum_pool),
    .m_valid(m_valid), .m_ready(m_ready), .m_tdata(m_data), .m_tkeep(m_keep), .m_tlast(m_last)
  );

  int checks = 0, failures = 0, n_out = 0, n_sum = 0;
  logic timed = 1'b1;

  typedef struct packed { logic [DW-1:0] data; logic [KB-1:0] keep; logic last; } beat_t;
  beat_t      beat_q [$];
  ctrl_meta_t rec_q  [$];
  bytes_t     exp_q  [$];
  bytes_t     cur;
  int         cur_beats = 0;

  // queue heads, presented after each falling edge, popped on the rising edge
  always @(posedge clk) begin
    if (rst_n && meta_valid && meta_ready) void'(rec_q.pop_front());
    if (rst_n && d_valid && d_ready) void'(beat_q.pop_front());
  end
  always @(negedge clk) begin
    meta_valid = (rec_q.size() != 0);
    if (meta_valid) meta = rec_q[0];
    d_valid = (beat_q.size() != 0);
    if (d_valid) {d_data, d_keep, d_last} = beat_q[0];
    if (!timed) m_ready = ($urandom_range(0, 3) != 0);
  end

  // output monitor
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      bytes_t e;
      for (int j = 0; j < KB; j++) if (m_keep[j]) cur.push_back(m_data[8*j +: 8]);
      cur_beats++;
      if (m_last) begin
        e = exp_q.pop_front();
        checks++;
        if (e != cur) begin
          failures++;
          $display("FAIL: packet %0d: got %0d bytes, expected %0d", n_out, cur.size(), e.size());
        end
        if (e.size() >= 14 && e[12] == 8'h12 && e[13] == 8'h34) begin
          n_sum++;
          checks++;
          if (cur_beats != 19) begin failures++; $display("FAIL: summary took %0d beats", cur_beats); end
        end
        n_out++;
        cur.delete();
        cur_beats = 0;
      end
    end
    // forwarding at full rate: a waiting beat with a waiting record must leave
    if (rst_n && timed && meta_valid && d_valid && !meta.replace) begin
      checks++;
      if (!(m_valid && d_ready)) begin failures++; $display("FAIL: forwarding stalled"); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic queue_pkt(bytes_t p, logic repl);
    ctrl_meta_t r;
    int nb;
    beat_t b;
    r = '0;
    r.replace = repl;
    r.hdr.eth_valid = 1'b1;
    nb = (p.size() + KB - 1) / KB;
    for (int k = 0; k < nb; k++) begin
      for (int j = 0; j < KB; j++) begin
        b.data[8*j +: 8] = (k*KB + j < p.size()) ? p[k*KB + j] : 8'h00;
        b.keep[j]        = (k*KB + j < p.size());
      end
      b.last = (k == nb - 1);
      beat_q.push_back(b);
    end
    rec_q.push_back(r);
  endtask

  initial begin
    bytes_t      p;
    pkt_info_t   inf;
    logic [63:0] pairs [$];
    logic        repl;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N_TIMED + N_RAND; i++) begin
      if (i == N_TIMED) begin
        while (n_out < N_TIMED) @(negedge clk);
        timed = 1'b0;
      end
      p = make_pkt(rnd_kind(), inf);
      repl = (i >= N_TIMED) && ($urandom_range(0, 3) == 0);
      if (repl) begin
        // load the summary bus, as the control block does, while the buffer is free
        while (!sum_free) @(negedge clk);
        pairs.delete();
        for (int k = 0; k < NP; k++) pairs.push_back({$urandom, $urandom});
        foreach (pairs[k]) sum_pool[64*(NP-1-k) +: 64] = pairs[k];
        sum_load = 1'b1;
        @(negedge clk);
        sum_load = 1'b0;
        exp_q.push_back(summary_pkt(pairs, NP));
      end else begin
        exp_q.push_back(p);
      end
      queue_pkt(p, repl);
      // keep the queues short so that timing matters
      while (rec_q.size() > 4) @(negedge clk);
    end
    while (n_out < N_TIMED + N_RAND) @(negedge clk);
    checks += 2;
    if (n_sum == 0) begin failures++; $display("FAIL: no summary packet"); end
    if (exp_q.size() != 0) begin failures++; $display("FAIL: packets missing"); end
    $display("summaries=%0d", n_sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
