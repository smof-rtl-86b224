// tb_smof_offchip_ports: the parallel-stream run of tb_smof_offchip_lanes
// with two memory ports instead of one (MEM_PORTS = 2), each port served by
// its own memory model. Skip lane 0 and weight lane 0 (read channels 0 and
// 2) use port 0; skip lane 1 and weight lane 1 (channels 1 and 3) use port 1.
// Each skip lane now has a write port to itself, while each read port is
// still shared by one skip lane and one weight lane.
//
// Checked: every word of every lane arrives correctly and in order, every
// burst and request on port p carries an id equal to p modulo 2, no read
// finds its queue empty, and both ports carry writes and reads. Counted, and
// required at least once: write bursts of each skip lane, read requests of
// each of the four channels, read-port switches on each port, data held off
// chip beyond the on-chip FIFOs in each skip lane, and a weight stall in each
// weight lane.
module tb_smof_offchip_ports;
  import smof_pkg::*;
  localparam int AL = 2, WL = 2, NCH = AL + WL, NP = 2;
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
  logic [NP-1:0][15:0] mem_wr_data, mem_rd_data;
  logic [NP-1:0]      mem_wr_valid, mem_wr_last, mem_wr_ready, mem_wr_id;
  logic [NP-1:0]      mem_rd_req_valid, mem_rd_req_ready, mem_rd_valid, mem_rd_ready;
  logic [NP-1:0][1:0] mem_rd_req_id;
  logic [NP-1:0][7:0] mem_rd_req_len;
  logic [AL-1:0][31:0] act_pending_beats, act_bursts_written;
  logic [WL-1:0][31:0] w_dyn_stall_cycles, w_passes;
  logic               slow = 0, hold = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  smof_offchip_top #(.W_DEPTH(DEPTH), .W_FRAG(FRAG), .W_DYN_MAP(DYN),
                     .ACT_LANES(AL), .WGT_LANES(WL), .MEM_PORTS(NP)) dut (.*);

  // one memory model per port; both are indexed by global channel id
  ddr_model #(.DW(16), .LEN_W(8), .LAT(8), .NQ(AL), .NI(WL), .IW(2), .WIW(1)) ddr0 (
    .clk, .slow, .hold,
    .wr_data(mem_wr_data[0]), .wr_valid(mem_wr_valid[0]), .wr_id(mem_wr_id[0]),
    .wr_ready(mem_wr_ready[0]),
    .req_valid(mem_rd_req_valid[0]), .req_len(mem_rd_req_len[0]), .req_id(mem_rd_req_id[0]),
    .req_ready(mem_rd_req_ready[0]),
    .rd_data(mem_rd_data[0]), .rd_valid(mem_rd_valid[0]), .rd_ready(mem_rd_ready[0]));
  ddr_model #(.DW(16), .LEN_W(8), .LAT(8), .NQ(AL), .NI(WL), .IW(2), .WIW(1)) ddr1 (
    .clk, .slow, .hold,
    .wr_data(mem_wr_data[1]), .wr_valid(mem_wr_valid[1]), .wr_id(mem_wr_id[1]),
    .wr_ready(mem_wr_ready[1]),
    .req_valid(mem_rd_req_valid[1]), .req_len(mem_rd_req_len[1]), .req_id(mem_rd_req_id[1]),
    .req_ready(mem_rd_req_ready[1]),
    .rd_data(mem_rd_data[1]), .rd_valid(mem_rd_valid[1]), .rd_ready(mem_rd_ready[1]));

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
  int n_rd_switch [NP];
  int last_rd [NP];
  int n_wrong_port = 0;
  initial begin
    for (int a = 0; a < AL; a++) begin n_wr_bursts[a] = 0; max_pending[a] = 0; end
    for (int c = 0; c < NCH; c++) n_rd[c] = 0;
    for (int p = 0; p < NP; p++) begin n_rd_switch[p] = 0; last_rd[p] = -1; end
  end
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      if (mem_wr_valid[p] && mem_wr_ready[p] && mem_wr_last[p]) begin
        n_wr_bursts[mem_wr_id[p]]++;
        if (int'(mem_wr_id[p]) % NP != p) n_wrong_port++;
      end
      if (mem_rd_req_valid[p] && mem_rd_req_ready[p]) begin
        n_rd[mem_rd_req_id[p]]++;
        if (int'(mem_rd_req_id[p]) % NP != p) n_wrong_port++;
        if (last_rd[p] >= 0 && int'(mem_rd_req_id[p]) != last_rd[p]) n_rd_switch[p]++;
        last_rd[p] = int'(mem_rd_req_id[p]);
      end
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
        if (g == 0) ddr0.load_image(AL + g, {8'(r - 1), dw[i]});
        else        ddr1.load_image(AL + g, {8'(r - 1), dw[i]});
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
      check(((a == 0) ? ddr0.written[a] : ddr1.written[a]) < FW * NFR,
            $sformatf("skip lane %0d: compressed", a));
    end
    for (int g = 0; g < WL; g++) begin
      check(wgot[g] == NPASS * DEPTH, $sformatf("weight lane %0d: all weights delivered", g));
      check(int'(w_passes[g]) == NPASS, $sformatf("weight lane %0d: passes", g));
      check(w_dyn_stall_cycles[g] > 0, $sformatf("weight lane %0d: stall on late refill", g));
    end
    for (int c = 0; c < NCH; c++) check(n_rd[c] > 0, $sformatf("read channel %0d used", c));
    for (int p = 0; p < NP; p++)
      check(n_rd_switch[p] > 0, $sformatf("read port %0d time-multiplexed", p));
    check(n_wrong_port == 0, "each channel on its own port");
    check(ddr0.underflows == 0 && ddr1.underflows == 0, "no read of unwritten activations");
    check(ddr0.bad_ids == 0 && ddr1.bad_ids == 0, "every channel id exists");
    $display("mechanisms: write bursts %0d/%0d, reads %0d/%0d/%0d/%0d,",
             n_wr_bursts[0], n_wr_bursts[1], n_rd[0], n_rd[1], n_rd[2], n_rd[3]);
    $display("            read switches %0d/%0d, max off-chip beats %0d/%0d, weight stalls %0d/%0d",
             n_rd_switch[0], n_rd_switch[1], max_pending[0], max_pending[1], w_dyn_stall_cycles[0],
             w_dyn_stall_cycles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
