// tb_huffman_decoder: loads the canonical code book as per-length counts and
// a symbol list, feeds back-to-back frames of packed beats made by a
// reference packer, under random valid/ready, and compares every word and
// frame-end flag. Frames end in padded beats, so this also checks that the
// padding is dropped and the next frame's beats are kept. A frame of zeros
// with no back-pressure checks the rate of one word per cycle.
module tb_huffman_decoder;
  import huf_tb_pkg::*;
  localparam int W = 8, IW = 16;
  logic clk = 0, rst_n = 1;
  logic          cfg_cnt_we = 0, cfg_sym_we = 0;
  logic [3:0]    cfg_cnt_len = '0;
  logic [W:0]    cfg_cnt_val = '0;
  logic [W-1:0]  cfg_sym_idx = '0, cfg_sym_val = '0;
  logic [31:0]   frame_words = 32'd37;
  logic [IW-1:0] in_data;
  logic          in_valid = 0, in_ready;
  logic [W-1:0]  out_data;
  logic          out_valid, out_last, out_ready = 0;
  int checks = 0, failures = 0;

  typedef struct { logic [W-1:0] d; bit last; } word_t;
  logic [15:0] src [$];
  word_t exp_q [$];

  always #5 clk = ~clk;

  huffman_decoder #(.W(W), .IN_W(IW), .MAXLEN(12), .FW_W(32)) dut (.*);

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

  task automatic add_frame(int n, int pzero);
    byte unsigned ws[$];
    for (int i = 0; i < n; i++) begin
      byte unsigned v = ($urandom_range(0, 99) < pzero) ? 8'd0 : 8'($urandom);
      ws.push_back(v);
      exp_q.push_back('{v, (i == n - 1)});
    end
    encode_frame(ws, src);
  endtask

  task automatic run(int pv, int pr, int max_cycles, output int cycles);
    cycles = 0;
    while ((src.size() > 0 || exp_q.size() > 0) && cycles < max_cycles) begin
      bit in_f, out_f;
      @(negedge clk);
      cycles++;
      in_valid  = (src.size() > 0) && ($urandom_range(0, 99) < pv);
      in_data   = (src.size() > 0) ? src[0] : '0;
      out_ready = ($urandom_range(0, 99) < pr);
      #1;
      in_f  = in_valid && in_ready;
      out_f = out_valid && out_ready;
      if (out_f) begin
        if (exp_q.size() == 0) check(0, "unexpected word");
        else begin
          check(out_data == exp_q[0].d, $sformatf("word %h vs %h", out_data, exp_q[0].d));
          check(out_last == exp_q[0].last, "last");
          void'(exp_q.pop_front());
        end
      end
      if (in_f) void'(src.pop_front());
    end
    in_valid = 0;
    @(negedge clk);
    out_ready = 0;
  endtask

  int cyc;
  initial begin
    in_data = '0;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l <= 12; l++) begin
      @(negedge clk);
      cfg_cnt_we = 1; cfg_cnt_len = 4'(l); cfg_cnt_val = 9'((l == 0) ? 0 : count_of(l));
    end
    @(negedge clk);
    cfg_cnt_we = 0;
    for (int r = 0; r < 256; r++) begin
      @(negedge clk);
      cfg_sym_we = 1; cfg_sym_idx = W'(r); cfg_sym_val = W'(sym_at(r));
    end
    @(negedge clk);
    cfg_sym_we = 0;
    for (int f = 0; f < 30; f++) add_frame(37, 50);
    run(60, 60, 200000, cyc);
    check(src.size() == 0 && exp_q.size() == 0, "short frames decoded");
    frame_words = 32'd250;
    for (int f = 0; f < 6; f++) add_frame(250, 30);
    run(80, 70, 200000, cyc);
    check(src.size() == 0 && exp_q.size() == 0, "long frames decoded");
    frame_words = 32'd320;
    add_frame(320, 100);
    run(100, 100, 1000, cyc);
    check(exp_q.size() == 0, "rate frame done");
    check(cyc <= 320 + 3, $sformatf("one word per cycle (%0d cycles for 320)", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
