// tb_p4_control -- test of the control block and its extern call, at N_P = 3.
//
// Header records, IPv4 or not at random, are offered with random gaps; the
// record queue behind the block is ready at random, and the summary buffer is
// kept busy for a random time after each load. A reference model predicts for
// every record whether it is forwarded or replaced and, on each replacement,
// the three pairs the summary bus must carry. Checked: the replace flag and the
// header copy of every record, the summary bus contents, that a replacement
// waits while the summary buffer is busy (counted, must occur), and that
// non-IPv4 records never touch the pool.
`timescale 1ns/1ps
module tb_p4_control;
  import he_pkg::*;

  localparam int unsigned NP = 3;
  localparam int unsigned N_REC = 3000;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              in_valid = 1'b0, in_ready;
  headers_t          in_hdr = '0;
  logic              out_valid, out_ready = 1'b0;
  ctrl_meta_t        out_meta;
  logic              sum_load, sum_free = 1'b1;
  logic [64*NP-1:0]  sum_pool;

  always #2 clk = ~clk;

  p4_control #(.N_P(NP)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_hdr(in_hdr),
    .out_valid(out_valid), .out_ready(out_ready), .out_meta(out_meta),
    .sum_load(sum_load), .sum_free(sum_free), .sum_pool(sum_pool)
  );

  int checks = 0, failures = 0, n_rec = 0, n_repl = 0, n_stall = 0, n_nonip = 0;
  logic [63:0] ref_pairs [$];
  int busy = 0;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: record %0d: %s", n_rec, what); end
  endtask

  // checker and summary-buffer model, on the rising edge
  always @(posedge clk) begin
    if (rst_n && in_valid && in_hdr.ipv4_valid && ref_pairs.size() == NP && !sum_free) begin
      n_stall++;
      check(!in_ready && !out_valid, "replacement passed while the summary buffer was busy");
    end
    if (rst_n && in_valid && in_ready) begin
      logic exp_repl;
      exp_repl = in_hdr.ipv4_valid && (ref_pairs.size() == NP);
      check(out_valid && out_ready, "record accepted without being passed on");
      check(out_meta.replace == exp_repl, "replace flag");
      check(out_meta.hdr == in_hdr, "header copy");
      check(sum_load == exp_repl, "summary load strobe");
      if (exp_repl) begin
        for (int i = 0; i < NP; i++)
          check(sum_pool[64*(NP-1-i) +: 64] == ref_pairs[i], $sformatf("summary pair %0d", i));
        ref_pairs.delete();
        n_repl++;
      end else if (in_hdr.ipv4_valid) begin
        ref_pairs.push_back({in_hdr.ipv4.src_addr, in_hdr.ipv4.dst_addr});
      end else begin
        n_nonip++;
      end
      n_rec++;
    end else if (rst_n) begin
      check(!sum_load, "summary load without a record");
    end
  end

  // summary buffer: busy for 0..20 clocks after each load
  always @(negedge clk) begin
    if (busy > 0) begin
      busy--;
      sum_free = (busy == 0);
    end
    out_ready = ($urandom_range(0, 4) != 0);
  end
  always @(posedge clk) if (rst_n && sum_load) begin
    busy <= $urandom_range(1, 20);
  end
  always @(negedge clk) if (busy > 0) sum_free = 1'b0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic acc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N_REC; i++) begin
      while ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      in_hdr                = '0;
      in_hdr.eth_valid      = 1'b1;
      in_hdr.eth.ether_type = 16'($urandom);
      in_hdr.ipv4_valid     = ($urandom_range(0, 4) != 0);
      in_hdr.ipv4.src_addr  = $urandom;
      in_hdr.ipv4.dst_addr  = $urandom;
      in_hdr.tcp.src_port   = 16'($urandom);
      in_valid = 1'b1;
      forever begin
        #1;
        acc = in_ready;
        @(negedge clk);
        if (acc) break;
      end
      in_valid = 1'b0;
    end
    repeat (3) @(negedge clk);
    checks += 3;
    if (n_rec != N_REC) begin failures++; $display("FAIL: %0d records passed", n_rec); end
    if (n_repl == 0)  begin failures++; $display("FAIL: no replacement"); end
    if (n_stall == 0) begin failures++; $display("FAIL: no summary stall"); end
    $display("replacements=%0d summary_stall_cycles=%0d non_ipv4=%0d", n_repl, n_stall, n_nonip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
