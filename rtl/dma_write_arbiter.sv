// dma_write_arbiter: time-multiplexes several DMA write ports onto one
// off-chip memory write port, a whole burst at a time.
//
// Each port offers beats with (port_data, port_valid, port_last); port_last
// marks the final beat of a burst. When the bank is free the arbiter picks a
// valid port round-robin, starting after the last winner, and connects it to
// the bank until the beat carrying port_last is taken. Bursts of different
// ports are therefore never interleaved, and bank_id tells the memory side
// which port (which evicted stream) a burst belongs to, so that it can append
// the burst to that stream's off-chip area. A port must offer a burst only
// when all of its beats are ready to go; activation_eviction does, so a grant
// never waits on a stalled producer.
//
// Sharing one bank among several DMA ports by time multiplexing is what SMOF
// does when the ports outnumber the banks; the burst-granular round-robin
// policy and the (valid, last, id) interface are this design's choices.
//
// Timing: the path from the ports to the bank is combinational and a new
// burst can start on the cycle after the previous one ends, with no idle
// cycle. Once bank_valid is raised, the chosen port (bank_id) and its beat
// stay put until bank_ready takes it.
module dma_write_arbiter
  import smof_pkg::*;
#(
  parameter int unsigned N  = 2,
  parameter int unsigned DW = DMA_W,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // ports
  input  logic [N-1:0][DW-1:0] port_data,
  input  logic [N-1:0]         port_valid,
  input  logic [N-1:0]         port_last,
  output logic [N-1:0]         port_ready,
  // memory bank
  output logic [DW-1:0]        bank_data,
  output logic                 bank_valid,
  output logic                 bank_last,
  output logic [IW-1:0]        bank_id,
  input  logic                 bank_ready
);
  logic          locked;      // a burst is in progress (or offered and not taken)
  logic [IW-1:0] cur;         // port holding the bank while locked
  logic [IW-1:0] last_win;    // round-robin pointer
  logic [IW-1:0] win;         // round-robin choice among valid ports
  logic          any_valid;
  logic [IW-1:0] sel;
  logic          fire;

  always_comb begin
    win       = last_win;
    any_valid = 1'b0;
    for (int k = 1; k <= int'(N); k++) begin
      automatic int p = (int'(last_win) + k) % int'(N);
      if (!any_valid && port_valid[p]) begin
        win       = IW'(p);
        any_valid = 1'b1;
      end
    end
  end

  always_comb begin
    sel        = locked ? cur : win;
    bank_id    = sel;
    bank_data  = port_data[sel];
    bank_last  = port_last[sel];
    bank_valid = locked ? port_valid[cur] : any_valid;
    port_ready = '0;
    port_ready[sel] = bank_ready && (locked || any_valid);
    fire       = bank_valid && bank_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked   <= 1'b0;
      cur      <= '0;
      last_win <= IW'(N - 1);
    end else if (!locked) begin
      if (any_valid) begin
        last_win <= win;
        cur      <= win;
        locked   <= !(fire && bank_last);
      end
    end else if (fire && bank_last) begin
      locked <= 1'b0;
    end
  end

  // A burst, once offered, is neither withdrawn nor switched to another port.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           bank_valid && !bank_ready |=> bank_valid && $stable(bank_id));
  a_one_ready: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(port_ready));
endmodule
