// dma_read_arbiter: time-multiplexes several DMA read ports onto one
// off-chip memory read port.
//
// When a design has more DMA ports than memory banks, ports have to share a
// bank. Each port asks for a burst with (req_valid, req_len); the arbiter
// grants one request at a time, round-robin starting after the last winner,
// forwards it to the bank tagged with the port number, and routes the next
// req_len returned beats to that port before it grants again. Because a port
// only asks for as many beats as it has room for, a granted burst always
// drains and the arbiter cannot deadlock. Sharing ports among banks by time
// multiplexing is what SMOF does when ports outnumber banks; the round-robin,
// burst-granular policy is this design's choice.
//
// Timing: a grant is registered, so a request reaches the bank one cycle
// after it wins; the data path from the bank to the port is combinational.
// The bank data is broadcast to every port's port_data unchanged; only the
// granted port sees port_valid, so the data outputs carry no logic of their
// own.
module dma_read_arbiter
  import smof_pkg::*;
#(
  parameter int unsigned N  = 2,
  parameter int unsigned DW = DMA_W,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ports
  input  logic [N-1:0]            req_valid,
  input  logic [N-1:0][LEN_W-1:0] req_len,
  output logic [N-1:0]            req_ready,
  output logic [N-1:0][DW-1:0]    port_data,
  output logic [N-1:0]            port_valid,
  input  logic [N-1:0]            port_ready,
  // memory bank
  output logic                    bank_req_valid,
  output logic [LEN_W-1:0]        bank_req_len,
  output logic [IW-1:0]           bank_req_id,
  input  logic                    bank_req_ready,
  input  logic [DW-1:0]           bank_data,
  input  logic                    bank_valid,
  output logic                    bank_ready
);
  typedef enum logic [1:0] {IDLE, ISSUE, DATA} state_e;

  state_e         state;
  logic [IW-1:0]  cur, last_win;
  logic [LEN_W-1:0] remain;
  logic [IW-1:0]  pick;
  logic           any;

  // round-robin choice, starting after the last winner
  always_comb begin
    pick = last_win;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_win) + k) % N;
      if (!any && req_valid[c]) begin
        any  = 1'b1;
        pick = IW'(c);
      end
    end
  end

  always_comb begin
    req_ready = '0;
    if (state == IDLE && any) req_ready[pick] = 1'b1;
    bank_req_valid = (state == ISSUE);
    bank_req_len   = remain;
    bank_req_id    = cur;
    port_valid     = '0;
    port_data      = '0;
    for (int i = 0; i < N; i++) port_data[i] = bank_data;
    if (state == DATA) port_valid[cur] = bank_valid;
    bank_ready = (state == DATA) && port_ready[cur];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      cur      <= '0;
      last_win <= IW'(N - 1);
      remain   <= '0;
    end else begin
      unique case (state)
        IDLE: if (any) begin
          cur      <= pick;
          last_win <= pick;
          remain   <= req_len[pick];
          state    <= (req_len[pick] == '0) ? IDLE : ISSUE;
        end
        ISSUE: if (bank_req_ready) state <= DATA;
        DATA: if (bank_valid && bank_ready) begin
          remain <= remain - 1'b1;
          if (remain == LEN_W'(1)) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_ready));
endmodule
