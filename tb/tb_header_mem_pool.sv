// tb_header_mem_pool -- test of the address-pair pool at N_P = 150.
//
// Three rounds: random pairs are written (with idle cycles between some of
// them) until the pool is full; count and full are checked after every write,
// the flat pool vector is compared with the pairs in write order (pair i at
// bytes 8i..8i+7 from the MSB end, source address first), then the pool is
// flushed and must read empty.
`timescale 1ns/1ps
module tb_header_mem_pool;

  localparam int unsigned NP = 150;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              wr_en = 1'b0, flush = 1'b0;
  logic [31:0]       wr_src = '0, wr_dst = '0;
  logic              full;
  logic [7:0]        count;
  logic [64*NP-1:0]  pool;

  always #2 clk = ~clk;

  header_mem_pool dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_src(wr_src), .wr_dst(wr_dst),
    .flush(flush), .full(full), .count(count), .pool(pool)
  );

  int checks = 0, failures = 0;
  logic [63:0] ref_pairs [NP];

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(count == 0 && !full, "empty after reset");
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < NP; i++) begin
        while ($urandom_range(0, 4) == 0) @(negedge clk);
        wr_src = $urandom;
        wr_dst = $urandom;
        ref_pairs[i] = {wr_src, wr_dst};
        wr_en = 1'b1;
        @(negedge clk);
        wr_en = 1'b0;
        check(int'(count) == i + 1, $sformatf("count %0d after %0d writes", count, i + 1));
        check(full == (i == NP - 1), "full flag");
      end
      for (int i = 0; i < NP; i++)
        check(pool[64*(NP-1-i) +: 64] == ref_pairs[i], $sformatf("round %0d pair %0d", round, i));
      // first payload bytes: source address of pair 0, most significant byte first
      check(pool[64*NP-1 -: 8] == ref_pairs[0][63:56], "byte order");
      flush = 1'b1;
      @(negedge clk);
      flush = 1'b0;
      check(count == 0 && !full, "empty after flush");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
