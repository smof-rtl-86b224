// wfrag_harness: runs one weight_fragment_memory with a given encoding of its
// off-chip image, against a ddr_model, and checks the weights it delivers.
//
// The memory holds DEPTH = 1024 sparse weights in four fragments of 256, of
// which fragments 1 and 3 are dynamic, so the two dynamic fragments are not
// adjacent and the static region is read in two separate pieces. The image
// of one pass (fragments 1 then 3) is built here in the port's format:
// canonical Huffman with the code book of huf_tb_pkg, or two raw words per
// beat, low byte first. For Huffman the decoder's code book is loaded while
// the block is held in reset, together with the static fragments.
// Phase 1 reads three passes under random back-pressure; phase 2 reads two
// passes at full speed and measures the cycles and the stall counter.
// Reports checks, failures, the image size and the phase-2 cycle count.
module wfrag_harness
  import smof_pkg::*;
  import huf_tb_pkg::*;
#(
  parameter enc_e ENC = ENC_HUFFMAN
) (
  input  logic clk,
  input  logic start,
  output int   checks,
  output int   failures,
  output bit   done,
  output int   image_beats,
  output int   fast_cycles,
  output int   fast_stalls
);
  localparam int DEPTH = 1024, FRAG = 256;
  localparam logic [3:0] DYN = 4'b1010;
  logic        rst_n;
  huf_cfg_t    hcfg;
  logic        st_we;
  logic [9:0]  st_addr;
  logic [7:0]  st_data, w_data;
  logic        w_valid, w_ready;
  logic        rd_req_valid, rd_req_ready, rd_valid, rd_ready, unused_wr_ready;
  logic [7:0]  rd_req_len;
  logic [15:0] rd_data;
  logic [31:0] dyn_stall_cycles, passes;

  weight_fragment_memory #(.ENC(ENC), .DEPTH(DEPTH), .FRAG(FRAG), .DYN_MAP(DYN)) dut (
    .clk, .rst_n, .hcfg, .st_we, .st_addr, .st_data,
    .w_data, .w_valid, .w_ready,
    .rd_req_valid, .rd_req_len, .rd_req_ready,
    .rd_data, .rd_valid, .rd_ready,
    .dyn_stall_cycles, .passes);

  ddr_model #(.DW(16), .LEN_W(8), .LAT(8)) ddr (
    .clk, .slow(1'b0), .hold(1'b0), .wr_data(16'h0), .wr_valid(1'b0), .wr_id(1'b0),
    .wr_ready(unused_wr_ready),
    .req_valid(rd_req_valid), .req_len(rd_req_len), .req_id(1'b1), .req_ready(rd_req_ready),
    .rd_data, .rd_valid, .rd_ready);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL[%s] %s at %0t", ENC.name(), what, $time);
    end
  endtask

  logic [7:0] wt [DEPTH];
  int pos;

  task automatic consume(int n, int pr, output int cycles);
    int k;
    k = 0;
    cycles = 0;
    while (k < n && cycles < 50000) begin
      @(negedge clk);
      cycles++;
      w_ready = ($urandom_range(0, 99) < pr);
      #1;
      if (w_valid && w_ready) begin
        check(w_data == wt[pos], $sformatf("weight %0d", pos));
        pos = (pos + 1) % DEPTH;
        k++;
      end
    end
    @(negedge clk);
    w_ready = 0;
  endtask

  initial begin
    int sa, cyc, s0;
    byte unsigned dw [$];
    logic [15:0] beats [$];
    checks = 0; failures = 0; done = 0; image_beats = 0; fast_cycles = 0; fast_stalls = 0;
    rst_n = 1; hcfg = '0; st_we = 0; st_addr = '0; st_data = '0; w_ready = 0; pos = 0;
    #2 rst_n = 0;
    wait (start);
    for (int i = 0; i < DEPTH; i++)
      wt[i] = ($urandom_range(0, 99) < 85) ? 8'd0 : 8'($urandom_range(1, 255));
    for (int i = 0; i < DEPTH; i++) if (DYN[i / FRAG]) dw.push_back(wt[i]);
    if (ENC == ENC_HUFFMAN) encode_frame(dw, beats);
    else for (int i = 0; i < dw.size(); i += 2) beats.push_back({dw[i + 1], dw[i]});
    foreach (beats[i]) ddr.load_image(1, beats[i]);
    image_beats = beats.size();
    // code book and static fragments, loaded during reset
    for (int s = 0; s < 256; s++) begin
      @(negedge clk);
      hcfg = '0;
      hcfg.sym_we = 1; hcfg.sym_idx = 8'(s); hcfg.sym_val = 8'(sym_at(s));
      if (s <= 12) begin hcfg.cnt_we = 1; hcfg.cnt_len = 4'(s); hcfg.cnt_val = 9'((s == 0) ? 0 : count_of(s)); end
    end
    sa = 0;
    for (int i = 0; i < DEPTH; i++) if (!DYN[i / FRAG]) begin
      @(negedge clk);
      hcfg = '0;
      st_we = 1; st_addr = 10'(sa); st_data = wt[i];
      sa++;
    end
    @(negedge clk);
    st_we = 0;
    hcfg = '0;
    rst_n = 1;
    consume(3 * DEPTH, 50, cyc);
    check(int'(passes) == 3, "three passes under back-pressure");
    s0 = int'(dyn_stall_cycles);
    consume(2 * DEPTH, 100, cyc);
    fast_cycles = cyc;
    fast_stalls = int'(dyn_stall_cycles) - s0;
    check(int'(passes) == 5, "five passes");
    check(fast_stalls == 0, $sformatf("no stall at full speed (%0d)", fast_stalls));
    check(cyc <= 2 * DEPTH + 2, $sformatf("one weight per cycle (%0d cycles)", cyc));
    check(ddr.reqs[1] > 0, "image fetched over DMA");
    done = 1;
  end
endmodule
