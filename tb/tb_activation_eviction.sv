// tb_activation_eviction: an evicted skip connection with each of the three
// port encodings (run-length, Huffman, none), each driven by evict_harness.
// Besides the harness checks, the run-length build, whose compressed traffic
// fits the memory model's bandwidth, must sustain at least 0.9 words per cycle
// end to end.
module tb_activation_eviction;
  import smof_pkg::*;
  logic clk = 0, rst_n = 1, start = 0;
  int c [3], f [3], r [3];
  bit d [3];
  int checks, failures;

  always #5 clk = ~clk;

  evict_harness #(.ENC(ENC_RLE))     h_rle  (.clk, .rst_n, .start, .checks(c[0]), .failures(f[0]), .done(d[0]), .rate_pct(r[0]));
  evict_harness #(.ENC(ENC_HUFFMAN)) h_huf  (.clk, .rst_n, .start, .checks(c[1]), .failures(f[1]), .done(d[1]), .rate_pct(r[1]));
  evict_harness #(.ENC(ENC_NONE))    h_none (.clk, .rst_n, .start, .checks(c[2]), .failures(f[2]), .done(d[2]), .rate_pct(r[2]));

  initial begin
    repeat (600000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    start = 1;
    wait (d[0] && d[1] && d[2]);
    checks   = c[0] + c[1] + c[2] + 1;
    failures = f[0] + f[1] + f[2];
    $display("rate (words per 100 cycles): rle %0d huffman %0d none %0d", r[0], r[1], r[2]);
    if (r[0] < 90) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
