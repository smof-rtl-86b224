// tb_huffman_encoder: loads a canonical code book, encodes frames of
// ReLU-like words (half of them zero) under random valid/ready and compares
// every beat and its frame-end flag with a bit-level reference packer. A last
// frame of zeros, with no back-pressure, checks the rate of one word per
// cycle (16 one-bit codes fill a beat every 16 cycles).
module tb_huffman_encoder;
  import huf_tb_pkg::*;
  localparam int W = 8, OW = 16;
  logic clk = 0, rst_n = 1;
  logic          cfg_we = 0;
  logic [W-1:0]  cfg_sym = '0;
  logic [11:0]   cfg_code = '0;
  logic [3:0]    cfg_len = '0;
  logic [W-1:0]  in_data;
  logic          in_valid = 0, in_last = 0, in_ready;
  logic [OW-1:0] out_data;
  logic          out_valid, out_last, out_ready = 0;
  int checks = 0, failures = 0;

  typedef struct { logic [W-1:0] d; bit last; } word_t;
  typedef struct { logic [OW-1:0] t; bit last; } beat_t;
  word_t src [$];
  beat_t exp_q [$];

  always #5 clk = ~clk;

  huffman_encoder #(.W(W), .OUT_W(OW), .MAXLEN(12)) dut (.*);

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
    logic [15:0] bs[$];
    for (int i = 0; i < n; i++) begin
      byte unsigned v = ($urandom_range(0, 99) < pzero) ? 8'd0 : 8'($urandom);
      ws.push_back(v);
      src.push_back('{v, (i == n - 1)});
    end
    encode_frame(ws, bs);
    foreach (bs[i]) exp_q.push_back('{bs[i], (i == bs.size() - 1)});
  endtask

  task automatic run(int pv, int pr, int max_cycles, output int cycles);
    cycles = 0;
    while ((src.size() > 0 || exp_q.size() > 0) && cycles < max_cycles) begin
      bit in_f, out_f;
      @(negedge clk);
      cycles++;
      in_valid  = (src.size() > 0) && ($urandom_range(0, 99) < pv);
      in_data   = (src.size() > 0) ? src[0].d : '0;
      in_last   = (src.size() > 0) ? src[0].last : 1'b0;
      out_ready = ($urandom_range(0, 99) < pr);
      #1;
      in_f  = in_valid && in_ready;
      out_f = out_valid && out_ready;
      if (out_f) begin
        if (exp_q.size() == 0) check(0, "unexpected beat");
        else begin
          check(out_data == exp_q[0].t, $sformatf("beat %h vs %h", out_data, exp_q[0].t));
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
    for (int s = 0; s < 256; s++) begin
      @(negedge clk);
      cfg_we = 1; cfg_sym = W'(s); cfg_code = 12'(code_of(s)); cfg_len = 4'(len_of(s));
    end
    @(negedge clk);
    cfg_we = 0;
    for (int f = 0; f < 25; f++) add_frame($urandom_range(1, 300), 50);
    run(70, 50, 200000, cyc);
    check(src.size() == 0 && exp_q.size() == 0, "all frames encoded");
    add_frame(320, 100);
    run(100, 100, 1000, cyc);
    check(exp_q.size() == 0, "rate frame done");
    check(cyc <= 320 + 3, $sformatf("one word per cycle (%0d cycles for 320)", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
