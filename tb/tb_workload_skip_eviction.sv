// tb_workload_skip_eviction: full-size skip connections of the evaluated
// networks, streamed through one activation_eviction at its default
// parameters (run-length coding, 16-beat bursts, two-burst FIFOs).
//
// Each workload is one feature map of the layer that feeds a long skip
// connection. The producer offers a word on 95% of cycles, the rate of the
// UNet example: 21 frames/s of 64 x 368 x 480 words at 250 MHz is 0.95
// words/cycle. The consumer (the concatenation at the far end of the long
// branch) starts when the producer is LEAD words ahead and then consumes at
// the same rate, so LEAD words stay in flight, which is the depth of the
// on-chip FIFO that eviction replaces. For UNet that depth is the 926 BRAMs
// of 18 Kbit the eviction frees: 926 * 18432 / 8 = 2,133,504 words. For the
// other networks the depth is not published and half a frame is used.
// Feature-map sizes: UNet 64 x 368 x 480 (CamVid input size, 64 channels
// after the first convolutions); YOLOv8n 32 x 160 x 160 (an early C2f
// output); X3D-M 24 x 16 x 128 x 128 (a residual stage input). UNet3D's
// 285 M-word map is too long to simulate here.
//
// The activations are ReLU-like: runs of zeros between random bytes, which
// gives the run-length coder a ratio near the 0.72 the UNet example reports.
// The memory model answers reads after 16 cycles.
//
// Checked for each workload: every word returns unchanged and in order,
// the off-chip area really holds about LEAD words (its peak in beats, times
// the compression, is within 10% of LEAD), nothing is read before it was
// written, the producer is never held up once the pipeline is running (at
// most 0.1% of its offers refused) and the consumer is starved on at most
// 1% of the cycles it wants data. Reported: compression ratio against raw
// 8-bit words and the write bandwidth at 250 MHz while the producer runs
// (Fig. 5 of the UNet example gives 1.4 Gbps on each of the two DMA ports).
module tb_workload_skip_eviction;
  import smof_pkg::*;
  localparam int NW = 3;
  localparam int F_WORDS [NW] = '{64 * 368 * 480, 32 * 160 * 160, 24 * 16 * 128 * 128};
  localparam int LEAD    [NW] = '{926 * 18432 / 8, 32 * 160 * 160 / 2, 24 * 16 * 128 * 128 / 2};
  localparam string NAME [NW] = '{"UNet Relu_3->Concat_47", "YOLOv8n", "X3D-M"};

  logic clk = 0, rst_n = 1;
  logic [31:0]   frame_words = '0;
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
    .clk, .rst_n, .hcfg('0), .frame_words,
    .in_data, .in_valid, .in_ready,
    .wr_data, .wr_valid, .wr_last, .wr_ready,
    .rd_req_valid, .rd_req_len, .rd_req_ready,
    .rd_data, .rd_valid, .rd_ready,
    .out_data, .out_valid, .out_ready,
    .pending_beats, .bursts_written);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(16)) ddr (
    .clk, .slow(1'b0), .hold(1'b0), .wr_data, .wr_valid, .wr_id(1'b0), .wr_ready,
    .req_valid(rd_req_valid), .req_len(rd_req_len), .req_id(1'b0), .req_ready(rd_req_ready),
    .rd_data, .rd_valid, .rd_ready);

  initial begin
    repeat (40000000) @(posedge clk);
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

  // ReLU-like word generator; the producer and the checker each run a copy
  function automatic logic [7:0] gen(ref int unsigned s, ref int run_left);
    s ^= s << 13; s ^= s >> 17; s ^= s << 5;
    if (run_left == 0) run_left = 1 + int'(s % 40);
    run_left--;
    s ^= s << 13; s ^= s >> 17; s ^= s << 5;
    return (run_left > 6) ? 8'd0 : 8'(s);
  endfunction

  initial begin
    int unsigned ps, cs;
    int p_run, c_run, produced, consumed, mismatches, max_pending;
    int refused, offers, starved, wanted, cycles, p_end;
    int unsigned beats0;
    real ratio, gbps;
    bit started;
    logic [7:0] nxt;
    #2 rst_n = 0;
    for (int w = 0; w < NW; w++) begin
      // reset between workloads; the frame length is set while in reset
      @(negedge clk);
      rst_n = 0;
      frame_words = 32'(F_WORDS[w]);
      in_valid = 0; out_ready = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      ps = 32'h1234_5678 + 32'(w); cs = ps; p_run = 0; c_run = 0;
      produced = 0; consumed = 0; mismatches = 0; max_pending = 0;
      refused = 0; offers = 0; starved = 0; wanted = 0; cycles = 0; p_end = 0;
      beats0 = ddr.words_written;
      started = 0;
      nxt = gen(ps, p_run);
      while (consumed < F_WORDS[w]) begin
        bit in_f, out_f;
        @(negedge clk);
        cycles++;
        in_data   = nxt;
        in_valid  = (produced < F_WORDS[w]) && ($urandom_range(0, 99) < 95);
        started   = started || (produced >= LEAD[w]) || (produced == F_WORDS[w]);
        out_ready = started && ($urandom_range(0, 99) < 95);
        #1;
        in_f  = in_valid && in_ready;
        out_f = out_valid && out_ready;
        if (in_valid && produced > 1000) begin
          offers++;
          if (!in_ready) refused++;
        end
        if (out_ready && consumed + 1000 < produced) begin
          wanted++;
          if (!out_valid) starved++;
        end
        if (out_f) begin
          if (out_data != gen(cs, c_run)) mismatches++;
          consumed++;
        end
        if (in_f) begin
          produced++;
          nxt = gen(ps, p_run);
          if (produced == F_WORDS[w]) p_end = cycles;
        end
        if (int'(pending_beats) > max_pending) max_pending = int'(pending_beats);
        if (cycles > 3 * F_WORDS[w]) break;
      end
      @(negedge clk);
      out_ready = 0;
      checks += consumed - mismatches;
      failures += mismatches;
      ratio = real'(ddr.words_written - beats0) * 2.0 / real'(F_WORDS[w]);
      gbps  = real'(ddr.words_written - beats0) * 16.0 / real'(p_end) * 0.25;
      check(consumed == F_WORDS[w], $sformatf("%s: whole map returned", NAME[w]));
      check(mismatches == 0, $sformatf("%s: words unchanged and in order", NAME[w]));
      check(real'(max_pending) * 2.0 / ratio > 0.9 * real'(LEAD[w]) &&
            real'(max_pending) * 2.0 / ratio < 1.1 * real'(LEAD[w]),
            $sformatf("%s: about LEAD words held off chip", NAME[w]));
      check(ddr.underflows == 0, $sformatf("%s: no read of unwritten data", NAME[w]));
      check(refused * 1000 <= offers, $sformatf("%s: producer not held up", NAME[w]));
      check(starved * 100 <= wanted, $sformatf("%s: consumer not starved", NAME[w]));
      $display("%s: %0d words in %0d cycles, peak off chip %0d beats (%0d words in flight),",
               NAME[w], F_WORDS[w], cycles, max_pending, LEAD[w]);
      $display("    compression %0.2f, %0.2f Gbps written at 250 MHz, refused %0d of %0d offers, starved %0d of %0d",
               ratio, gbps, refused, offers, starved, wanted);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
