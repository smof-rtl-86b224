// tb_weight_fragment_codecs: the fragmented weight memory with the two
// encodings its DMA port can carry besides run-length coding: canonical
// Huffman and none (two raw words per beat). Each runs in its own
// wfrag_harness with two non-adjacent dynamic fragments; see that file for
// what is checked. Also checked: the Huffman image is smaller than the raw
// one (the weights are 85% zero, and zero has a 1-bit code).
module tb_weight_fragment_codecs;
  import smof_pkg::*;
  logic clk = 0, start = 0;
  int  c_h, f_h, c_n, f_n, img_h, img_n, cyc_h, cyc_n, st_h, st_n;
  bit  d_h, d_n;
  int checks, failures;

  always #5 clk = ~clk;

  wfrag_harness #(.ENC(ENC_HUFFMAN)) h_huf (.clk, .start, .checks(c_h), .failures(f_h), .done(d_h),
                                            .image_beats(img_h), .fast_cycles(cyc_h), .fast_stalls(st_h));
  wfrag_harness #(.ENC(ENC_NONE))    h_raw (.clk, .start, .checks(c_n), .failures(f_n), .done(d_n),
                                            .image_beats(img_n), .fast_cycles(cyc_n), .fast_stalls(st_n));

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c_h + c_n, f_h + f_n + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    start = 1;
    wait (d_h && d_n);
    checks   = c_h + c_n + 1;
    failures = f_h + f_n;
    if (!(img_h < img_n)) failures++;
    $display("image beats for 512 weights: huffman %0d, none %0d", img_h, img_n);
    $display("full-speed cycles for 2048 weights: huffman %0d (%0d stalls), none %0d (%0d stalls)",
             cyc_h, st_h, cyc_n, st_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
