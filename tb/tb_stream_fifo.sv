// tb_stream_fifo: random pushes and pops against a queue model; checks data
// order, the occupancy count, that a full FIFO refuses a lone push and that a
// word written is readable on the next cycle.
module tb_stream_fifo;
  localparam int W = 16, DEPTH = 16;
  logic clk = 0, rst_n = 1;
  logic [W-1:0] in_data, out_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int saw_full = 0;
  int pp;
  bit popf, pushf;

  always #5 clk = ~clk;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

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

  initial begin
    in_data = '0;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // phases: fill-heavy, drain-heavy, balanced
      @(negedge clk);
      pp = (cyc < 1000) ? 80 : (cyc < 2000) ? 20 : 50;
      in_valid  = ($urandom_range(0, 99) < pp);
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 99) < 100 - pp);
      #1;
      check(count == ($clog2(DEPTH)+1)'(model.size()), "count");
      check(out_valid == (model.size() > 0), "out_valid");
      if (model.size() > 0) check(out_data == model[0], "data");
      check(in_ready == (model.size() < DEPTH || out_ready), "in_ready");
      if (model.size() == DEPTH) saw_full++;
      popf  = out_valid && out_ready;
      pushf = in_valid && in_ready;
      if (popf) void'(model.pop_front());
      if (pushf) model.push_back(in_data);
    end
    check(saw_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
