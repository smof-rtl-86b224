// tb_smof_offchip_top: end-to-end run of the off-chip subsystem at its default
// parameters: an evicted skip connection and a fragmented weight memory
// (4096 weights, fragment 1 of 4 dynamic), both run-length coded, sharing one
// memory read port.
//
// A producer sends 8 frames of ReLU-like activations into the skip
// connection; the consumer (the far end of the long branch) starts late. At
// the same time the convolution side reads weights continuously. The memory
// model is made slow for a while (write back-pressure) and later stops
// answering reads (late weight refill). Checked: every activation and every
// weight is delivered correctly and in order. Each mechanism must have
// happened at least once: full write bursts, short frame-end bursts,
// read-back bursts, weight refill bursts, arbitration switching between the
// two read channels, compression, data held off chip beyond the on-chip
// FIFOs, write back-pressure reaching the producer, and a weight stall.
module tb_smof_offchip_top;
  import smof_pkg::*;
  localparam int DEPTH = 4096, FRAG = 1024, FW = 1500, NFR = 8;
  localparam logic [3:0] DYN = 4'b0010;
  logic clk = 0, rst_n = 1;
  huf_cfg_t    hcfg_act = '0, hcfg_wgt = '0;
  logic [31:0] frame_words = 32'(FW);
  logic [7:0]  skip_in_data = '0, skip_out_data;
  logic        skip_in_valid = 0, skip_in_ready, skip_out_valid, skip_out_ready = 0;
  logic        st_we = 0;
  logic [11:0] st_addr = '0;
  logic [7:0]  st_data = '0, w_data;
  logic        w_valid, w_ready = 0;
  logic [15:0] mem_wr_data, mem_rd_data;
  logic        mem_wr_valid, mem_wr_last, mem_wr_ready, mem_wr_id;
  logic        mem_rd_req_valid, mem_rd_req_id, mem_rd_req_ready, mem_rd_valid, mem_rd_ready;
  logic [7:0]  mem_rd_req_len;
  logic [31:0] act_pending_beats, act_bursts_written, w_dyn_stall_cycles, w_passes;
  logic        slow = 0, hold = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  smof_offchip_top dut (.*);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(8)) ddr (
    .clk, .slow, .hold,
    .wr_data(mem_wr_data), .wr_valid(mem_wr_valid), .wr_id(mem_wr_id), .wr_ready(mem_wr_ready),
    .req_valid(mem_rd_req_valid), .req_len(mem_rd_req_len), .req_id(mem_rd_req_id),
    .req_ready(mem_rd_req_ready),
    .rd_data(mem_rd_data), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready));

  initial begin
    repeat (400000) @(posedge clk);
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

  // mechanism counters
  int n_full_bursts = 0, n_short_bursts = 0, n_rd_act = 0, n_rd_wgt = 0, n_switch = 0;
  int n_backpressure = 0, max_pending = 0, beat_in_burst = 0, last_id = -1;
  always @(posedge clk) if (rst_n) begin
    if (mem_wr_valid && mem_wr_ready) begin
      beat_in_burst++;
      if (mem_wr_last) begin
        if (beat_in_burst == BURST) n_full_bursts++; else n_short_bursts++;
        beat_in_burst = 0;
      end
    end
    if (mem_rd_req_valid && mem_rd_req_ready) begin
      if (mem_rd_req_id) n_rd_wgt++; else n_rd_act++;
      if (last_id >= 0 && int'(mem_rd_req_id) != last_id) n_switch++;
      last_id = int'(mem_rd_req_id);
    end
    if (skip_in_valid && !skip_in_ready) n_backpressure++;
    if (int'(act_pending_beats) > max_pending) max_pending = int'(act_pending_beats);
  end

  logic [7:0] wt [DEPTH];
  logic [7:0] exp_q [$];
  int produced = 0, consumed = 0, wpos = 0, wgot = 0, run_left = 0;
  logic [7:0] next_word;

  function automatic logic [7:0] gen_word();
    if (run_left == 0) run_left = $urandom_range(1, 40);
    run_left--;
    return (run_left > 6) ? 8'd0 : 8'($urandom_range(0, 255));
  endfunction

  initial begin
    int sa;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    // weights and their off-chip image (run-length tokens of fragment 1)
    for (int i = 0; i < DEPTH; i++) wt[i] = ($urandom_range(0, 99) < 85) ? 8'd0 : 8'($urandom_range(1, 255));
    begin
      logic [7:0] dw [$];
      for (int i = 0; i < DEPTH; i++) if (DYN[i / FRAG]) dw.push_back(wt[i]);
      for (int i = 0; i < dw.size();) begin
        int r;
        r = 1;
        while (i + r < dw.size() && dw[i + r] == dw[i] && r < 256) r++;
        ddr.load_image(1, {8'(r - 1), dw[i]});
        i += r;
      end
    end
    sa = 0;
    for (int i = 0; i < DEPTH; i++) if (!DYN[i / FRAG]) begin
      @(negedge clk);
      st_we = 1; st_addr = 12'(sa); st_data = wt[i];
      sa++;
    end
    @(negedge clk);
    st_we = 0;
    rst_n = 1;
    next_word = gen_word();
    for (int cyc = 0; (consumed < FW * NFR || wgot < 6 * DEPTH) && cyc < 300000; cyc++) begin
      bit in_f, out_f, w_f;
      @(negedge clk);
      slow  = (cyc > 2000 && cyc < 4000);
      hold  = (cyc > 12000 && cyc < 21000);
      skip_in_valid  = (produced < FW * NFR) && ($urandom_range(0, 99) < 85);
      skip_in_data   = next_word;
      skip_out_ready = (produced > 3 * FW || produced == FW * NFR) && ($urandom_range(0, 99) < 70);
      w_ready        = (wgot < 6 * DEPTH) && ($urandom_range(0, 99) < 90);
      #1;
      in_f  = skip_in_valid && skip_in_ready;
      out_f = skip_out_valid && skip_out_ready;
      w_f   = w_valid && w_ready;
      if (out_f) begin
        if (exp_q.size() == 0) check(0, "activation out of nowhere");
        else begin
          check(skip_out_data == exp_q[0], "activation returned");
          void'(exp_q.pop_front());
        end
        consumed++;
      end
      if (in_f) begin
        exp_q.push_back(skip_in_data);
        produced++;
        next_word = gen_word();
      end
      if (w_f) begin
        check(w_data == wt[wpos], $sformatf("weight %0d", wpos));
        wpos = (wpos + 1) % DEPTH;
        wgot++;
      end
    end
    check(consumed == FW * NFR, $sformatf("all activations returned (%0d)", consumed));
    check(wgot == 6 * DEPTH, $sformatf("all weights delivered (%0d)", wgot));
    check(int'(w_passes) == 6, "weight passes");
    check(ddr.underflows == 0, "no read of unwritten activations");
    $display("mechanisms: full bursts %0d, short bursts %0d, activation reads %0d, weight reads %0d,",
             n_full_bursts, n_short_bursts, n_rd_act, n_rd_wgt);
    $display("            read-port switches %0d, beats written %0d for %0d words, max off-chip beats %0d,",
             n_switch, ddr.words_written, FW * NFR, max_pending);
    $display("            producer back-pressure cycles %0d, weight stall cycles %0d",
             n_backpressure, w_dyn_stall_cycles);
    check(n_full_bursts > 0, "full write bursts");
    check(n_short_bursts > 0, "frame-end write bursts");
    check(n_rd_act > 0, "activation read-back");
    check(n_rd_wgt > 0, "weight refill");
    check(n_switch > 0, "read port time-multiplexed");
    check(ddr.words_written < FW * NFR, "activations compressed");
    check(max_pending > 2 * 2 * BURST, "held off chip beyond the on-chip FIFOs");
    check(n_backpressure > 0, "write back-pressure reached the producer");
    check(w_dyn_stall_cycles > 0, "weight stall on late refill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
