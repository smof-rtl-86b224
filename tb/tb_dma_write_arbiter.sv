// tb_dma_write_arbiter: three ports offer write bursts of random length (1 to
// 16 beats) at random times, with beats tagged {port, sequence number} and
// occasional gaps inside a burst; the bank accepts beats at random. Checked
// on every cycle: the port chosen for a new burst is the round-robin choice,
// bursts of different ports are never interleaved, an offered beat and its id
// hold until taken, bank_id names the beat's port, only that port sees ready,
// and every port's beats arrive complete and in order with bank_last on the
// last beat of each burst. Under full load the grants must rotate, and the
// bank must take a beat on every cycle it is ready and a beat is offered.
module tb_dma_write_arbiter;
  import smof_pkg::*;
  localparam int N = 3, DW = 16, IW = 2;
  logic clk = 0, rst_n = 1;
  logic [N-1:0][DW-1:0] port_data = '0;
  logic [N-1:0]         port_valid = '0, port_last = '0, port_ready;
  logic [DW-1:0]        bank_data;
  logic                 bank_valid, bank_last, bank_ready = 0;
  logic [IW-1:0]        bank_id;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dma_write_arbiter #(.N(N), .DW(DW), .IW(IW)) dut (.*);

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

  int left [N];       // beats of the current burst not yet taken
  int seq [N];        // next sequence number a port sends
  int rx_seq [N];     // next sequence number expected at the bank
  int sent [N];
  int rx [N];
  int bursts [N];
  bit in_burst = 0;   // model: the bank belongs to `owner` until its last beat
  int owner = 0;
  int last_win = N - 1;
  bit prev_stall = 0;
  int prev_id = 0;
  logic [DW-1:0] prev_data = '0;
  int rotations = 0, prev_grant = -1, idle_with_offer = 0;

  initial begin
    int pick, c, p;
    bit fire;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      left[i] = 0; seq[i] = 0; rx_seq[i] = 0; sent[i] = 0; rx[i] = 0; bursts[i] = 0;
    end
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      // ports: start a burst now and then (always under full load), and leave
      // an occasional gap inside a burst before full load
      for (int i = 0; i < N; i++) begin
        if (left[i] == 0 && $urandom_range(0, 99) < ((cyc > 24000) ? 100 : 20)) begin
          left[i] = $urandom_range(1, 16);
          sent[i] += left[i];
        end
        port_valid[i] = (left[i] > 0) &&
                        ((cyc > 24000) || (prev_stall && prev_id == i) ||
                         $urandom_range(0, 99) < 85);
        port_last[i]  = (left[i] == 1);
        port_data[i]  = {IW'(i), (DW-IW)'(seq[i])};
      end
      bank_ready = (cyc > 24000) ? 1'b1 : ($urandom_range(0, 99) < 70);
      #1;
      check($onehot0(port_ready), "one port ready");
      if (prev_stall) begin
        check(bank_valid, "offered beat held");
        check(int'(bank_id) == prev_id && bank_data == prev_data, "held beat unchanged");
      end
      if (!in_burst) begin
        pick = -1;
        for (int k = 1; k <= N; k++) begin
          c = (last_win + k) % N;
          if (pick < 0 && port_valid[c]) pick = c;
        end
        check(bank_valid == (pick >= 0), "offer when a port is valid");
        if (pick >= 0) begin
          check(int'(bank_id) == pick, "round-robin choice");
          last_win = pick;
          owner    = pick;
          in_burst = 1;
          if (prev_grant >= 0 && pick != prev_grant) rotations++;
          prev_grant = pick;
        end
      end else begin
        check(int'(bank_id) == owner, "burst not interleaved");
        check(bank_valid == port_valid[owner], "owner's valid forwarded");
      end
      fire = bank_valid && bank_ready;
      if (bank_valid) begin
        p = int'(bank_id);
        check(bank_data == port_data[p] && bank_last == port_last[p], "data of the chosen port");
        check(port_ready[p] == bank_ready, "ready to the chosen port");
        for (int i = 0; i < N; i++) if (i != p) check(!port_ready[i], "no ready elsewhere");
      end
      if (cyc > 24000 && port_valid != '0 && !bank_valid) idle_with_offer++;
      if (fire) begin
        p = int'(bank_id);
        check(int'(bank_data[DW-IW-1:0]) == (rx_seq[p] & ((1 << (DW-IW)) - 1)), "in order");
        check(int'(bank_data[DW-1 -: IW]) == p, "tag matches id");
        check(bank_last == (left[p] == 1), "last on the burst's final beat");
        rx_seq[p]++;
        rx[p]++;
        seq[p]++;
        left[p]--;
        if (bank_last) begin
          in_burst = 0;
          bursts[p]++;
        end
      end
      prev_stall = bank_valid && !bank_ready;
      prev_id    = int'(bank_id);
      prev_data  = bank_data;
    end
    // drain: keep the bank ready until all bursts are taken
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        port_valid[i] = left[i] > 0;
        port_last[i]  = left[i] == 1;
        port_data[i]  = {IW'(i), (DW-IW)'(seq[i])};
      end
      bank_ready = 1'b1;
      #1;
      if (bank_valid) begin
        p = int'(bank_id);
        if (in_burst) check(p == owner, "burst not interleaved (drain)");
        in_burst = !bank_last;
        owner    = p;
        check(int'(bank_data[DW-IW-1:0]) == (rx_seq[p] & ((1 << (DW-IW)) - 1)), "in order (drain)");
        rx_seq[p]++; rx[p]++; seq[p]++; left[p]--;
        if (bank_last) bursts[p]++;
      end
    end
    @(negedge clk);
    port_valid = '0;
    for (int i = 0; i < N; i++) begin
      check(rx[i] == sent[i], $sformatf("port %0d: all %0d beats written", i, sent[i]));
      check(bursts[i] > 100, $sformatf("port %0d: bursts granted (%0d)", i, bursts[i]));
    end
    check(rotations > 1000, $sformatf("grants rotate (%0d switches)", rotations));
    check(idle_with_offer == 0, "no idle cycle between bursts under full load");
    $display("bursts per port: %0d %0d %0d, switches %0d", bursts[0], bursts[1], bursts[2], rotations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
