// tb_weight_fragment_memory: the fragmented weight memory at its default size
// (4096 weights, four fragments of 1024, fragment 1 dynamic, run-length coded
// image). Sparse weights are generated here; the static fragments are loaded
// into the physical memory and the dynamic fragment is run-length coded into
// the image of a memory model. Checked: every weight of every pass equals the
// logical weight array, under random consumer back-pressure; at full speed a
// pass takes exactly 4096 cycles with no stall; when the memory stops
// answering, the output stalls (and the stall counter counts it) but no
// weight is lost or reordered.
// The memory refuses reads for 4500 cycles from cycle 1100 of a pass, so the
// refill for the next pass's dynamic fragment arrives late.
module tb_weight_fragment_memory;
  import smof_pkg::*;
  localparam int DEPTH = 4096, FRAG = 1024;
  localparam logic [3:0] DYN = 4'b0010;
  logic clk = 0, rst_n = 1;
  huf_cfg_t    hcfg = '0;
  logic        st_we = 0;
  logic [11:0] st_addr = '0;
  logic [7:0]  st_data = '0;
  logic [7:0]  w_data;
  logic        w_valid, w_ready = 0;
  logic        rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [7:0]  rd_req_len;
  logic [15:0] rd_data, unused_wr;
  logic [31:0] dyn_stall_cycles, passes;
  logic        hold = 0, unused_wr_ready;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_fragment_memory dut (.*);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(8)) ddr (
    .clk, .slow(1'b0), .hold, .wr_data(16'h0), .wr_valid(1'b0), .wr_id(1'b0), .wr_ready(unused_wr_ready),
    .req_valid(rd_req_valid), .req_len(rd_req_len), .req_id(1'b1), .req_ready(rd_req_ready),
    .rd_data, .rd_valid, .rd_ready);

  initial begin
    repeat (200000) @(posedge clk);
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

  logic [7:0] wt [DEPTH];
  int pos = 0, got = 0, p0, stalls0, cyc, t_start;

  // consume n weights with ready probability pr, comparing each
  task automatic consume(int n, int pr, output int cycles);
    int k = 0;
    cycles = 0;
    while (k < n && cycles < 100000) begin
      @(negedge clk);
      cycles++;
      w_ready = ($urandom_range(0, 99) < pr);
      #1;
      if (w_valid && w_ready) begin
        check(w_data == wt[pos], $sformatf("weight %0d: %h vs %h", pos, w_data, wt[pos]));
        pos = (pos + 1) % DEPTH;
        k++;
      end
    end
    @(negedge clk);
    w_ready = 0;
  endtask

  initial begin
    int sa;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    // sparse weights: 85% zero
    for (int i = 0; i < DEPTH; i++) wt[i] = ($urandom_range(0, 99) < 85) ? 8'd0 : 8'($urandom_range(1, 255));
    // run-length image of the dynamic fragments, one pass = one frame
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
      $display("dynamic image: %0d beats for %0d weights", ddr.img[0].size(), dw.size());
      check(ddr.img[0].size() < dw.size() / 2, "image compressed");
    end
    // load static fragments while the block is held in reset
    sa = 0;
    for (int i = 0; i < DEPTH; i++) if (!DYN[i / FRAG]) begin
      @(negedge clk);
      st_we = 1; st_addr = 12'(sa); st_data = wt[i];
      sa++;
    end
    @(negedge clk);
    st_we = 0;
    check(sa == DEPTH - FRAG, "static region is (1-m)d");
    rst_n = 1;
    // phase 1: two passes under back-pressure
    consume(2 * DEPTH, 60, cyc);
    check(passes == 2, "two passes");
    // phase 2: full speed, no stall, one weight per cycle
    p0 = int'(passes);
    stalls0 = int'(dyn_stall_cycles);
    consume(2 * DEPTH, 100, cyc);
    check(int'(dyn_stall_cycles) == stalls0, $sformatf("no stall at full speed (%0d)",
          int'(dyn_stall_cycles) - stalls0));
    check(cyc <= 2 * DEPTH + 2, $sformatf("one weight per cycle (%0d cycles)", cyc));
    check(int'(passes) == p0 + 2, "pass counter");
    // phase 3: memory stops answering during the dynamic fragment
    stalls0 = int'(dyn_stall_cycles);
    fork
      consume(2 * DEPTH, 100, cyc);
      begin
        repeat (1100) @(posedge clk);
        hold = 1;
        repeat (4500) @(posedge clk);
        hold = 0;
      end
    join
    check(int'(dyn_stall_cycles) > stalls0, $sformatf("stall when refill is late (%0d)",
          int'(dyn_stall_cycles) - stalls0));
    check(int'(passes) == p0 + 4, "pass counter after stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
