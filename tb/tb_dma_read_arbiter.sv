// tb_dma_read_arbiter: three ports raise burst requests of random length at
// random times; a bank model answers each forwarded request after a latency
// with beats tagged {port, sequence number}. Checked: at most one grant at a
// time and round-robin order, the forwarded length and port number, that each
// port receives exactly its own beats in order and as many as it asked for,
// and that with all ports asking the grants rotate.
module tb_dma_read_arbiter;
  import smof_pkg::*;
  localparam int N = 3, DW = 16, IW = 2;
  logic clk = 0, rst_n = 1;
  logic [N-1:0]            req_valid = '0, req_ready, port_valid, port_ready = '0;
  logic [N-1:0][LEN_W-1:0] req_len = '0;
  logic [N-1:0][DW-1:0]    port_data;
  logic                    bank_req_valid, bank_req_ready = 0, bank_valid = 0, bank_ready;
  logic [LEN_W-1:0]        bank_req_len;
  logic [IW-1:0]           bank_req_id;
  logic [DW-1:0]           bank_data = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dma_read_arbiter #(.N(N), .DW(DW), .IW(IW)) dut (.*);

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

  // port side state
  int owed [N];          // beats asked for and not yet received
  int rx_seq [N];        // next expected sequence number
  int total_rx [N];
  int total_req [N];
  // bank side state
  bit b_busy = 0;
  int b_id, b_left, b_wait;
  int b_seq [N];
  int last_win = N - 1;
  int granted_len;
  int rotations = 0, prev_grant = -1;
  bit [N-1:0] clr = '0;

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin owed[i] = 0; rx_seq[i] = 0; b_seq[i] = 0; total_rx[i] = 0; total_req[i] = 0; end
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int pick, c;
      bit all_req;
      @(negedge clk);
      for (int i = 0; i < N; i++) if (clr[i]) begin req_valid[i] = 1'b0; clr[i] = 1'b0; end
      // ports: ask when nothing is owed (or keep asking while unanswered)
      for (int i = 0; i < N; i++) begin
        if (!req_valid[i] && owed[i] == 0 && $urandom_range(0, 99) < ((cyc > 15000) ? 100 : 30)) begin
          req_valid[i] = 1'b1;
          req_len[i]   = LEN_W'($urandom_range(1, 16));
        end
        port_ready[i] = ($urandom_range(0, 99) < 75);
      end
      bank_req_ready = ($urandom_range(0, 99) < 60);
      bank_valid     = b_busy && (b_wait == 0) && ($urandom_range(0, 99) < 70);
      bank_data      = {IW'(b_id), (DW-IW)'(b_seq[b_id])};
      #1;
      // grants
      check($onehot0(req_ready), "one grant");
      pick = -1;
      for (int k = 1; k <= N; k++) begin
        c = (last_win + k) % N;
        if (pick < 0 && req_valid[c]) pick = c;
      end
      all_req = &req_valid;
      for (int i = 0; i < N; i++) if (req_valid[i] && req_ready[i]) begin
        check(i == pick, "round-robin order");
        if (all_req && prev_grant >= 0 && i == (prev_grant + 1) % N) rotations++;
        prev_grant = i;
        last_win = i;
        granted_len = int'(req_len[i]);
        owed[i] += int'(req_len[i]);
        total_req[i] += int'(req_len[i]);
        clr[i] = 1'b1;         // dropped after this edge
      end
      // bank request
      if (bank_req_valid && bank_req_ready) begin
        check(!b_busy, "request while busy");
        check(int'(bank_req_id) == last_win, "forwarded id");
        check(int'(bank_req_len) == granted_len, "forwarded len");
        b_busy = 1; b_id = int'(bank_req_id); b_left = int'(bank_req_len); b_wait = 3;
      end else if (b_busy && b_wait > 0) b_wait--;
      // data
      for (int i = 0; i < N; i++) if (port_valid[i]) check(b_busy && i == b_id, "routed to owner");
      if (bank_valid && bank_ready) begin
        check(port_valid[b_id] && port_ready[b_id], "handshake mirrored");
        check(port_data[b_id] == bank_data, "data routed");
        check(int'(port_data[b_id][DW-1 -: IW]) == b_id && int'(port_data[b_id][DW-IW-1:0]) == rx_seq[b_id],
              "own beats in order");
        rx_seq[b_id]++; b_seq[b_id]++; owed[b_id]--; total_rx[b_id]++;
        b_left--;
        if (b_left == 0) b_busy = 0;
      end
    end
    for (int i = 0; i < N; i++) begin
      check(total_rx[i] + owed[i] == total_req[i], "beats accounted");
      check(total_rx[i] > 100, $sformatf("every port served %0d %0d %0d", total_rx[i], owed[i], total_req[i]));
    end
    check(rotations > 20, $sformatf("grants rotate under full load (%0d)", rotations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
