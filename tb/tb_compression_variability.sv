// tb_compression_variability: what happens to an evicted skip connection
// when its activations compress worse than the design assumed.
//
// Eviction is sized for an average compression ratio, but the ratio of real
// activations changes from input to input. If the memory still has spare
// bandwidth the difference is absorbed; once it has none, the eviction can
// no longer keep up, back-pressure reaches the producer and the pipeline
// slows down. This testbench shows that behaviour on one activation_eviction
// (default parameters, run-length coding) whose memory accepts writes on only
// 40% of cycles and returns read data on every other cycle, a fixed bandwidth
// budget of about 0.4 beats per cycle each way.
//
// The producer offers 0.95 words per cycle and the consumer starts 4000
// words behind. Five runs of 30000 words use less and less compressible
// ReLU-like data: the non-zero stretch at the end of each run of up to 40
// words grows from 7 words to all 40. For each run the compression ratio
// (DMA beats against raw 8-bit words) and the sustained rate (words per
// cycle while the producer runs) are measured.
//
// Checked: every word returns unchanged and in order; with the best-
// compressing data the rate stays at the producer's 0.95 words per cycle
// (within 3%); with the worst the rate drops below 0.6 words per cycle;
// the rate never rises as compression gets worse (within 3%); and the rate
// times the beats per word, the bandwidth actually used, never exceeds the
// budget.
module tb_compression_variability;
  import smof_pkg::*;
  localparam int NL = 5, N = 30000, LEADW = 4000;
  localparam int TAIL [NL] = '{7, 12, 20, 30, 40};

  logic clk = 0, rst_n = 1;
  logic [7:0]    in_data = '0, out_data;
  logic          in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0]   wr_data, rd_data;
  logic          wr_valid, wr_last, wr_ready, rd_valid, rd_ready;
  logic          rd_req_valid, rd_req_ready;
  logic [7:0]    rd_req_len;
  logic [31:0]   pending_beats, bursts_written;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  activation_eviction dut (
    .clk, .rst_n, .hcfg('0), .frame_words(32'(N)),
    .in_data, .in_valid, .in_ready,
    .wr_data, .wr_valid, .wr_last, .wr_ready,
    .rd_req_valid, .rd_req_len, .rd_req_ready,
    .rd_data, .rd_valid, .rd_ready,
    .out_data, .out_valid, .out_ready,
    .pending_beats, .bursts_written);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(8), .WR_PCT(40)) ddr (
    .clk, .slow(1'b1), .hold(1'b0), .wr_data, .wr_valid, .wr_id(1'b0), .wr_ready,
    .req_valid(rd_req_valid), .req_len(rd_req_len), .req_id(1'b0), .req_ready(rd_req_ready),
    .rd_data, .rd_valid, .rd_ready);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ReLU-like words: runs of 1..40 words whose last `tail` words are random
  function automatic logic [7:0] gen(ref int unsigned s, ref int run_left, input int tail);
    s ^= s << 13; s ^= s >> 17; s ^= s << 5;
    if (run_left == 0) run_left = 1 + int'(s % 40);
    run_left--;
    s ^= s << 13; s ^= s >> 17; s ^= s << 5;
    return (run_left >= tail) ? 8'd0 : 8'(s);
  endfunction

  initial begin
    int unsigned ps, cs;
    int p_run, c_run, produced, consumed, mismatches, cycles, p_end;
    int unsigned beats0;
    real ratio [NL];
    real rate [NL];
    real used;
    logic [7:0] nxt;
    #2 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      ps = 32'h9e37_79b9 + 32'(l); cs = ps; p_run = 0; c_run = 0;
      produced = 0; consumed = 0; mismatches = 0; cycles = 0; p_end = 0;
      beats0 = ddr.words_written;
      nxt = gen(ps, p_run, TAIL[l]);
      while (consumed < N && cycles < 400000) begin
        @(negedge clk);
        cycles++;
        in_data   = nxt;
        in_valid  = (produced < N) && ($urandom_range(0, 99) < 95);
        out_ready = (produced >= LEADW) || (produced == N);
        #1;
        if (out_valid && out_ready) begin
          if (out_data != gen(cs, c_run, TAIL[l])) mismatches++;
          consumed++;
        end
        if (in_valid && in_ready) begin
          produced++;
          nxt = gen(ps, p_run, TAIL[l]);
          if (produced == N) p_end = cycles;
        end
      end
      @(negedge clk);
      in_valid  = 0;
      out_ready = 0;
      checks   += consumed - mismatches;
      failures += mismatches;
      check(consumed == N, $sformatf("run %0d: all words returned", l));
      ratio[l] = real'(ddr.words_written - beats0) * 2.0 / real'(N);
      rate[l]  = real'(N) / real'(p_end);
      used     = rate[l] * ratio[l] / 2.0;
      $display("non-zero tail %2d: compression %0.2f, rate %0.3f words/cycle, %0.3f beats/cycle used",
               TAIL[l], ratio[l], rate[l], used);
      check(used < 0.42, $sformatf("run %0d: within the bandwidth budget", l));
      if (l > 0) begin
        check(ratio[l] > ratio[l - 1], $sformatf("run %0d: compresses worse", l));
        check(rate[l] <= rate[l - 1] * 1.03, $sformatf("run %0d: rate does not rise", l));
      end
    end
    check(rate[0] >= 0.95 * 0.97, "spare bandwidth absorbs the best case");
    check(rate[NL - 1] < 0.6, "insufficient bandwidth stalls the pipeline");
    check(ddr.underflows == 0, "no read of unwritten data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
