// tb_rle_decoder: random run-length tokens (runs of 1 to 256, some flagged as
// frame ends) are expanded under random valid/ready and compared word by word
// with the expansion computed here, including the frame-end flag. A final
// stream of single-word tokens with no back-pressure checks the rate of one
// word per cycle.
module tb_rle_decoder;
  localparam int W = 8, IW = 16;
  logic clk = 0, rst_n = 1;
  logic [IW-1:0] in_data;
  logic          in_valid = 0, in_last = 0, in_ready;
  logic [W-1:0]  out_data;
  logic          out_valid, out_last, out_ready = 0;
  int checks = 0, failures = 0;

  typedef struct { logic [IW-1:0] t; bit last; } tok_t;
  typedef struct { logic [W-1:0] d; bit last; } word_t;
  tok_t  src [$];
  word_t exp_q [$];

  always #5 clk = ~clk;

  rle_decoder #(.W(W), .IN_W(IW)) dut (.*);

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

  task automatic add_token(int run_len, logic [W-1:0] v, bit last);
    src.push_back('{{8'(run_len - 1), v}, last});
    for (int i = 0; i < run_len; i++) exp_q.push_back('{v, last && (i == run_len - 1)});
  endtask

  task automatic run(int pv, int pr, int max_cycles, output int cycles);
    cycles = 0;
    while ((src.size() > 0 || exp_q.size() > 0) && cycles < max_cycles) begin
      bit in_f, out_f;
      @(negedge clk);
      cycles++;
      in_valid  = (src.size() > 0) && ($urandom_range(0, 99) < pv);
      in_data   = (src.size() > 0) ? src[0].t : '0;
      in_last   = (src.size() > 0) ? src[0].last : 1'b0;
      out_ready = ($urandom_range(0, 99) < pr);
      #1;
      in_f  = in_valid && in_ready;
      out_f = out_valid && out_ready;
      if (out_f) begin
        if (exp_q.size() == 0) check(0, "unexpected word");
        else begin
          check(out_data == exp_q[0].d, "word");
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
    for (int i = 0; i < 400; i++)
      add_token((i % 5 == 0) ? $urandom_range(1, 256) : $urandom_range(1, 4),
                W'($urandom), ($urandom_range(0, 9) == 0));
    run(60, 70, 200000, cyc);
    check(src.size() == 0 && exp_q.size() == 0, "all tokens expanded");
    for (int i = 0; i < 200; i++) add_token(1, W'(i), (i == 199));
    run(100, 100, 1000, cyc);
    check(exp_q.size() == 0, "rate stream done");
    check(cyc <= 200 + 2, $sformatf("one word per cycle (%0d cycles for 200)", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
