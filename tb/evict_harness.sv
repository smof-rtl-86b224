// evict_harness: drives one activation_eviction instance with a producer, a
// delayed consumer and a ddr_model, and checks what comes back.
//
// The producer emits frames of ReLU-like words (runs of zeros between random
// values). The consumer, standing for the slow long branch, starts only after
// the producer is FW*3/2 words ahead, so most of the connection sits off chip.
// Checked: every word comes back unchanged and in order; the off-chip area
// held more than the two on-chip FIFOs could; nothing was read that had not
// been written; with an encoding, fewer beats than words went off chip.
// Phase 2 runs both ends at full speed and reports the words-per-cycle rate.
module evict_harness
  import smof_pkg::*;
  import huf_tb_pkg::*;
#(
  parameter enc_e ENC = ENC_RLE,
  parameter int   FW  = 700,     // words per frame
  parameter int   NFR = 8,       // frames in phase 1
  parameter int   LAT = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output int   checks,
  output int   failures,
  output bit   done,
  output int   rate_pct
);
  huf_cfg_t      hcfg;
  logic [7:0]    in_data, out_data;
  logic          in_valid, in_ready, out_valid, out_ready;
  logic [15:0]   wr_data, rd_data;
  logic          wr_valid, wr_last, wr_ready, rd_valid, rd_ready;
  logic          rd_req_valid, rd_req_ready;
  logic [7:0]    rd_req_len;
  logic [31:0]   pending_beats, bursts_written;
  logic          slow;

  activation_eviction #(.ENC(ENC)) dut (
    .clk, .rst_n, .hcfg, .frame_words(32'(FW)),
    .in_data, .in_valid, .in_ready,
    .wr_data, .wr_valid, .wr_last, .wr_ready,
    .rd_req_valid, .rd_req_len, .rd_req_ready,
    .rd_data, .rd_valid, .rd_ready,
    .out_data, .out_valid, .out_ready,
    .pending_beats, .bursts_written);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(LAT)) ddr (
    .clk, .slow, .hold(1'b0), .wr_data, .wr_valid, .wr_id(1'b0), .wr_ready,
    .req_valid(rd_req_valid), .req_len(rd_req_len), .req_id(1'b0), .req_ready(rd_req_ready),
    .rd_data, .rd_valid, .rd_ready);

  logic [7:0] exp_q [$];
  int produced, consumed, max_pending, run_left;
  logic [7:0] next_word;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL[%s] %s at %0t", ENC.name(), what, $time);
    end
  endtask

  function automatic logic [7:0] gen_word();
    if (run_left == 0) run_left = $urandom_range(1, 40);
    run_left--;
    return (run_left > 6) ? 8'd0 : 8'($urandom_range(0, 255));
  endfunction

  int t0, t1, n_phase1;
  initial begin
    checks = 0; failures = 0; done = 0; rate_pct = 0;
    hcfg = '0; in_valid = 0; out_ready = 0; in_data = '0; slow = 0;
    produced = 0; consumed = 0; max_pending = 0; run_left = 0;
    wait (start);
    // code book (used by the Huffman build only)
    for (int s = 0; s < 256; s++) begin
      @(negedge clk);
      hcfg = '0;
      hcfg.enc_we = 1; hcfg.enc_sym = 8'(s); hcfg.enc_code = 12'(code_of(s)); hcfg.enc_len = 4'(len_of(s));
      hcfg.sym_we = 1; hcfg.sym_idx = 8'(s); hcfg.sym_val = 8'(sym_at(s));
      if (s <= 12) begin hcfg.cnt_we = 1; hcfg.cnt_len = 4'(s); hcfg.cnt_val = 9'((s == 0) ? 0 : count_of(s)); end
    end
    @(negedge clk);
    hcfg = '0;
    next_word = gen_word();
    n_phase1 = FW * NFR;
    // phase 1: slow consumer that starts late; memory sometimes slow
    for (int cyc = 0; consumed < n_phase1 && cyc < 400000; cyc++) begin
      bit in_f, out_f;
      @(negedge clk);
      slow      = (cyc % 2000) > 1500;
      in_valid  = (produced < n_phase1) && ($urandom_range(0, 99) < 80);
      in_data   = next_word;
      out_ready = (produced > FW * 3 / 2 || produced == n_phase1) && ($urandom_range(0, 99) < 60);
      #1;
      in_f  = in_valid && in_ready;
      out_f = out_valid && out_ready;
      if (int'(pending_beats) > max_pending) max_pending = int'(pending_beats);
      if (out_f) begin
        if (exp_q.size() == 0) check(0, "word out of nowhere");
        else begin
          check(out_data == exp_q[0], "word returned");
          void'(exp_q.pop_front());
        end
        consumed++;
      end
      if (in_f) begin
        exp_q.push_back(in_data);
        produced++;
        next_word = gen_word();
      end
    end
    check(consumed == n_phase1, $sformatf("all words returned (%0d/%0d)", consumed, n_phase1));
    check(max_pending > 4 * BURST, $sformatf("data held off chip (%0d beats)", max_pending));
    check(ddr.underflows == 0, "no read of unwritten data");
    check(bursts_written > NFR, "bursts written");
    if (ENC != ENC_NONE)
      check(ddr.words_written < n_phase1, $sformatf("compressed (%0d beats for %0d words)",
            ddr.words_written, n_phase1));
    // phase 2: both ends at full speed
    slow = 0;
    t0 = -1;
    for (int cyc = 0; consumed < n_phase1 + 4 * FW && cyc < 100000; cyc++) begin
      bit in_f, out_f;
      @(negedge clk);
      in_valid  = (produced < n_phase1 + 4 * FW);
      in_data   = next_word;
      out_ready = 1'b1;
      #1;
      in_f  = in_valid && in_ready;
      out_f = out_valid && out_ready;
      if (out_f) begin
        if (t0 < 0) t0 = cyc;
        t1 = cyc;
        if (exp_q.size() == 0) check(0, "word out of nowhere");
        else begin
          check(out_data == exp_q[0], "word returned");
          void'(exp_q.pop_front());
        end
        consumed++;
      end
      if (in_f) begin
        exp_q.push_back(in_data);
        produced++;
        next_word = gen_word();
      end
    end
    in_valid = 0;
    check(consumed == n_phase1 + 4 * FW, "phase 2 complete");
    rate_pct = (100 * 4 * FW) / (t1 - t0 + 1);
    done = 1;
  end
endmodule
