// tb_smof_offchip_lanes: end-to-end run of the off-chip subsystem with
// parallel streams: two evicted skip lanes and two fragmented weight lanes
// (1024 weights each, fragments 1 and 2 of 4 dynamic, so half the weights
// come over DMA), all run-length coded. The two skip lanes share the memory
// write port, and all four lanes share the memory read port; the memory model
// keeps a separate off-chip queue for each skip lane and a separate weight
// image for each weight lane.
//
// Each skip lane carries its own ReLU-like frames, with the consumers starting
// late; each weight lane has its own weights. The memory is slow for a while
// and later pauses its reads. Checked: every word of every lane arrives
// correctly and in order (so no lane's data reaches another lane), no read
// finds its queue empty, and every write and read is tagged with a channel
// that exists. Counted, and required at least once: write bursts of each
// skip lane, the write port switching between skip lanes, read requests of
// each of the four channels, read-port switches, data held off chip beyond
// the on-chip FIFOs in each skip lane, and a weight stall in each weight lane.
module tb_smof_offchip_lanes;
  import smof_pkg::*;
  localparam int AL = 2, WL = 2, NCH = AL + WL;
  localparam int DEPTH = 1024, FRAG = 256, FW = 600, NFR = 4, NPASS = 8;
  localparam logic [3:0] DYN = 4'b0110;
  logic clk = 0, rst_n = 1;
  huf_cfg_t    hcfg_act = '0, hcfg_wgt = '0;
  logic [31:0] frame_words = 32'(FW);
  logic [AL-1:0][7:0] skip_in_data = '0, skip_out_data;
  logic [AL-1:0]      skip_in_valid = '0, skip_in_ready, skip_out_valid, skip_out_ready = '0;
  logic [WL-1:0]      st_we = '0;
  logic [9:0]         st_addr = '0;
  logic [7:0]         st_data = '0;
  logic [WL-1:0][7:0] w_data;
  logic [WL-1:0]      w_valid, w_ready = '0;
  logic [15:0]        mem_wr_data, mem_rd_data;
  logic               mem_wr_valid, mem_wr_last, mem_wr_ready, mem_wr_id;
  logic               mem_rd_req_valid, mem_rd_req_ready, mem_rd_valid, mem_rd_ready;
  logic [1:0]         mem_rd_req_id;
  logic [7:0]         mem_rd_req_len;
  logic [AL-1:0][31:0] act_pending_beats, act_bursts_written;
  logic [WL-1:0][31:0] w_dyn_stall_cycles, w_passes;
  logic               slow = 0, hold = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  smof_offchip_top #(.W_DEPTH(DEPTH), .W_FRAG(FRAG), .W_DYN_MAP(DYN),
                     .ACT_LANES(AL), .WGT_LANES(WL)) dut (.*);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(8), .NQ(AL), .NI(WL), .IW(2), .WIW(1)) ddr (
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
  int n_wr_bursts [AL];
  int n_rd [NCH];
  int max_pending [AL];
  int n_wr_switch = 0, n_rd_switch = 0, last_wr = -1, last_rd = -1;
  initial begin
    for (int a = 0; a < AL; a++) begin n_wr_bursts[a] = 0; max_pending[a] = 0; end
    for (int c = 0; c < NCH; c++) n_rd[c] = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (mem_wr_valid && mem_wr_ready && mem_wr_last) begin
      n_wr_bursts[mem_wr_id]++;
      if (last_wr >= 0 && int'(mem_wr_id) != last_wr) n_wr_switch++;
      last_wr = int'(mem_wr_id);
    end
    if (mem_rd_req_valid && mem_rd_req_ready) begin
      n_rd[mem_rd_req_id]++;
      if (last_rd >= 0 && int'(mem_rd_req_id) != last_rd) n_rd_switch++;
      last_rd = int'(mem_rd_req_id);
    end
    for (int a = 0; a < AL; a++)
      if (int'(act_pending_beats[a]) > max_pending[a]) max_pending[a] = int'(act_pending_beats[a]);
  end

  logic [7:0] wt [WL][DEPTH];
  logic [7:0] exp_q [AL][$];
  logic [7:0] next_word [AL];
  int produced [AL], consumed [AL], run_left [AL];
  int wpos [WL], wgot [WL];

  function automatic logic [7:0] gen_word(int a);
    if (run_left[a] == 0) run_left[a] = $urandom_range(1, 40);
    run_left[a]--;
    return (run_left[a] > 6) ? 8'd0 : 8'($urandom_range(0, 255));
  endfunction

  function automatic bit done();
    for (int a = 0; a < AL; a++) if (consumed[a] < FW * NFR) return 0;
    for (int g = 0; g < WL; g++) if (wgot[g] < NPASS * DEPTH) return 0;
    return 1;
  endfunction

  initial begin
    int sa;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    for (int a = 0; a < AL; a++) begin produced[a] = 0; consumed[a] = 0; run_left[a] = 0; end
    for (int g = 0; g < WL; g++) begin
      logic [7:0] dw [$];
      wpos[g] = 0; wgot[g] = 0;
      for (int i = 0; i < DEPTH; i++)
        wt[g][i] = ($urandom_range(0, 99) < 85) ? 8'd0 : 8'($urandom_range(1, 255));
      // off-chip image of this lane: run-length tokens of its dynamic fragments
      dw.delete();
      for (int i = 0; i < DEPTH; i++) if (DYN[i / FRAG]) dw.push_back(wt[g][i]);
      for (int i = 0; i < dw.size();) begin
        int r;
        r = 1;
        while (i + r < dw.size() && dw[i + r] == dw[i] && r < 256) r++;
        ddr.load_image(AL + g, {8'(r - 1), dw[i]});
        i += r;
      end
      // static fragments of this lane, loaded while the design is in reset
      sa = 0;
      for (int i = 0; i < DEPTH; i++) if (!DYN[i / FRAG]) begin
        @(negedge clk);
        st_we = '0; st_we[g] = 1'b1; st_addr = 10'(sa); st_data = wt[g][i];
        sa++;
      end
      @(negedge clk);
      st_we = '0;
    end
    rst_n = 1;
    for (int a = 0; a < AL; a++) next_word[a] = gen_word(a);
    for (int cyc = 0; !done() && cyc < 300000; cyc++) begin
      @(negedge clk);
      slow = (cyc > 1500 && cyc < 3000);
      hold = (cyc > 8000 && cyc < 11000);
      for (int a = 0; a < AL; a++) begin
        skip_in_valid[a]  = (produced[a] < FW * NFR) && ($urandom_range(0, 99) < 60);
        skip_in_data[a]   = next_word[a];
        skip_out_ready[a] = (produced[a] > 2 * FW || produced[a] == FW * NFR) &&
                            ($urandom_range(0, 99) < 60);
      end
      for (int g = 0; g < WL; g++)
        w_ready[g] = (wgot[g] < NPASS * DEPTH) && ($urandom_range(0, 99) < 40);
      #1;
      for (int a = 0; a < AL; a++) begin
        if (skip_out_valid[a] && skip_out_ready[a]) begin
          if (exp_q[a].size() == 0) check(0, $sformatf("lane %0d: activation out of nowhere", a));
          else begin
            check(skip_out_data[a] == exp_q[a][0], $sformatf("lane %0d: activation returned", a));
            void'(exp_q[a].pop_front());
          end
          consumed[a]++;
        end
        if (skip_in_valid[a] && skip_in_ready[a]) begin
          exp_q[a].push_back(skip_in_data[a]);
          produced[a]++;
          next_word[a] = gen_word(a);
        end
      end
      for (int g = 0; g < WL; g++)
        if (w_valid[g] && w_ready[g]) begin
          check(w_data[g] == wt[g][wpos[g]], $sformatf("lane %0d weight %0d", g, wpos[g]));
          wpos[g] = (wpos[g] + 1) % DEPTH;
          wgot[g]++;
        end
    end
    for (int a = 0; a < AL; a++) begin
      check(consumed[a] == FW * NFR, $sformatf("skip lane %0d: all activations returned", a));
      check(n_wr_bursts[a] > 0, $sformatf("skip lane %0d: write bursts", a));
      check(max_pending[a] > 2 * 2 * BURST, $sformatf("skip lane %0d: held off chip", a));
      check(ddr.written[a] < FW * NFR, $sformatf("skip lane %0d: compressed", a));
    end
    for (int g = 0; g < WL; g++) begin
      check(wgot[g] == NPASS * DEPTH, $sformatf("weight lane %0d: all weights delivered", g));
      check(int'(w_passes[g]) == NPASS, $sformatf("weight lane %0d: passes", g));
      check(w_dyn_stall_cycles[g] > 0, $sformatf("weight lane %0d: stall on late refill", g));
    end
    for (int c = 0; c < NCH; c++) check(n_rd[c] > 0, $sformatf("read channel %0d used", c));
    check(n_wr_switch > 0, "write port time-multiplexed");
    check(n_rd_switch > 0, "read port time-multiplexed");
    check(ddr.underflows == 0, "no read of unwritten activations");
    check(ddr.bad_ids == 0, "every channel id exists");
    $display("mechanisms: write bursts %0d/%0d, write switches %0d, reads %0d/%0d/%0d/%0d,",
             n_wr_bursts[0], n_wr_bursts[1], n_wr_switch, n_rd[0], n_rd[1], n_rd[2], n_rd[3]);
    $display("            read switches %0d, max off-chip beats %0d/%0d, weight stalls %0d/%0d",
             n_rd_switch, max_pending[0], max_pending[1], w_dyn_stall_cycles[0],
             w_dyn_stall_cycles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
