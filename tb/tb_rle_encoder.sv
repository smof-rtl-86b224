// tb_rle_encoder: frames of words with runs of random length (some longer
// than the 256-word run limit) are encoded under random valid/ready; the
// tokens are compared with run-length tokens computed here, including the
// frame-end flag. A final frame of alternating words with no back-pressure
// checks the rate of one word per cycle.
module tb_rle_encoder;
  localparam int W = 8, OW = 16;
  logic clk = 0, rst_n = 1;
  logic [W-1:0]  in_data;
  logic          in_valid = 0, in_last = 0, in_ready;
  logic [OW-1:0] out_data;
  logic          out_valid, out_last, out_ready = 0;
  int checks = 0, failures = 0;

  typedef struct { logic [W-1:0] d; bit last; } word_t;
  typedef struct { logic [OW-1:0] t; bit last; } tok_t;
  word_t src [$];
  tok_t  exp_q [$];

  always #5 clk = ~clk;

  rle_encoder #(.W(W), .OUT_W(OW)) dut (.*);

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

  // Append one frame to the source and its tokens to the expectation.
  task automatic add_frame(int n, int max_run);
    int k = 0;
    while (k < n) begin
      logic [W-1:0] v = W'($urandom_range(0, 3));
      int r = $urandom_range(1, max_run);
      if (r > n - k) r = n - k;
      for (int i = 0; i < r; i++) src.push_back('{v, (k + i == n - 1)});
      k += r;
    end
    // expected tokens from the words just added
    begin
      int start = src.size() - n;
      logic [W-1:0] v = src[start].d;
      int cnt = 1;
      for (int i = start + 1; i <= src.size(); i++) begin
        if (i == src.size() || src[i].d != v || cnt == 256) begin
          exp_q.push_back('{{8'(cnt - 1), v}, (i == src.size())});
          if (i < src.size()) begin v = src[i].d; cnt = 1; end
        end else cnt++;
      end
    end
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
        if (exp_q.size() == 0) check(0, "unexpected token");
        else begin
          check(out_data == exp_q[0].t, "token");
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
    for (int f = 0; f < 30; f++) add_frame($urandom_range(1, 700), (f % 3 == 0) ? 400 : 6);
    run(70, 60, 100000, cyc);
    check(src.size() == 0 && exp_q.size() == 0, "all frames encoded");
    // rate: 300 alternating words, full speed
    for (int i = 0; i < 300; i++) src.push_back('{W'(i % 2), (i == 299)});
    for (int i = 0; i < 300; i++) exp_q.push_back('{{8'd0, W'(i % 2)}, (i == 299)});
    run(100, 100, 1000, cyc);
    check(exp_q.size() == 0, "rate frame done");
    check(cyc <= 300 + 3, $sformatf("one word per cycle (%0d cycles for 300)", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
