// activation_eviction: an evicted skip connection.
//
// In a layer-pipelined CNN accelerator a long skip connection (for example
// from an early ReLU to the concatenation many layers later in a UNet) needs a
// buffer deep enough to hold everything the long branch has not yet consumed.
// This block replaces that deep buffer by a detour through off-chip memory:
//
//   producer -> encoder -> burst FIFO -> DMA write port   (DMA_OUT)
//   DMA read port -> burst FIFO -> decoder -> consumer    (DMA_IN)
//
// Only the two small FIFOs stay on chip. Each holds FIFO_DEPTH beats, two
// bursts by default, so that one burst can be in flight while the other drains. The
// structure (encode, small FIFO, DMA_OUT; DMA_IN, small FIFO, decode) follows
// the eviction circuit of SMOF; the burst policy, the request protocol and the
// frame handling are this design's own.
//
// Write side: the producer's words are counted against `frame_words` to mark
// the frame's last word, encoded (ENC) and queued. A write burst starts when a
// full burst is queued, or when the frame's final beat is queued; it then
// sends BURST beats, or stops early after the frame's final beat. `wr_last`
// flags the final beat of every burst.
// Off-chip space is a FIFO managed outside this block (the host keeps its
// head and tail pointers); this block only counts `pending_beats`, the beats
// written and not yet asked back.
// Read side: a request for `rd_req_len` beats is raised when beats are
// pending and the read FIFO has room for all of them or for a full burst
// (beats in flight are counted against the room). Returned beats go through
// the read FIFO to the decoder and on to the consumer.
//
// Timing: one word per cycle on each side in steady state, given the off-chip
// memory keeps up. The round trip adds the encoder, FIFO, DMA and decoder
// latencies to the skip path; the long branch is assumed to be slower than
// that, which is the condition under which eviction is chosen.
module activation_eviction
  import smof_pkg::*;
#(
  parameter enc_e        ENC   = ENC_RLE,
  parameter int unsigned W     = WORD_W,
  parameter int unsigned DW    = DMA_W,
  parameter int unsigned BURST_LEN = BURST,
  parameter int unsigned FIFO_DEPTH = 2 * BURST_LEN,  // each of the two FIFOs
  parameter int unsigned FW_W  = 32,
  parameter int unsigned PW    = 32   // width of the pending-beat counter
) (
  input  logic               clk,
  input  logic               rst_n,
  input  huf_cfg_t           hcfg,
  input  logic [FW_W-1:0]    frame_words,
  // skip-connection input (from the producer layer)
  input  logic [W-1:0]       in_data,
  input  logic               in_valid,
  output logic               in_ready,
  // DMA_OUT
  output logic [DW-1:0]      wr_data,
  output logic               wr_valid,
  output logic               wr_last,
  input  logic               wr_ready,
  // DMA_IN request
  output logic               rd_req_valid,
  output logic [LEN_W-1:0]   rd_req_len,
  input  logic               rd_req_ready,
  // DMA_IN data
  input  logic [DW-1:0]      rd_data,
  input  logic               rd_valid,
  output logic               rd_ready,
  // skip-connection output (to the consumer, e.g. a concatenation)
  output logic [W-1:0]       out_data,
  output logic               out_valid,
  input  logic               out_ready,
  // status
  output logic [PW-1:0]      pending_beats,
  output logic [PW-1:0]      bursts_written
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  // ---------------- write side ----------------
  logic [FW_W-1:0] in_count;
  logic            in_last;
  logic [DW-1:0]   enc_data;
  logic            enc_valid, enc_last, enc_ready;
  logic [DW:0]     wq_data;
  logic            wq_valid, wq_ready;
  logic [CW-1:0]   wq_count;
  logic [CW-1:0]   n_final;      // frame-final beats waiting in the write FIFO
  logic            bursting;
  logic [CW-1:0]   burst_sent;
  logic            wr_fire, enc_fire;

  assign in_last = (in_count == frame_words - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_count <= '0;
    else if (in_valid && in_ready) in_count <= in_last ? '0 : in_count + 1'b1;
  end

  stream_encoder #(.ENC(ENC), .W(W), .OUT_W(DW)) u_enc (
    .clk, .rst_n, .hcfg,
    .in_data, .in_valid, .in_last, .in_ready,
    .out_data(enc_data), .out_valid(enc_valid), .out_last(enc_last), .out_ready(enc_ready));

  stream_fifo #(.W(DW+1), .DEPTH(FIFO_DEPTH)) u_wr_fifo (
    .clk, .rst_n,
    .in_data({enc_last, enc_data}), .in_valid(enc_valid), .in_ready(enc_ready),
    .out_data(wq_data), .out_valid(wq_valid), .out_ready(wq_ready),
    .count(wq_count));

  assign enc_fire = enc_valid && enc_ready;
  assign wr_data  = wq_data[DW-1:0];
  assign wr_valid = bursting && wq_valid;
  assign wr_last  = wq_data[DW] || (burst_sent == CW'(BURST_LEN - 1));
  assign wq_ready = bursting && wr_ready;
  assign wr_fire  = wr_valid && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bursting       <= 1'b0;
      burst_sent     <= '0;
      n_final        <= '0;
      bursts_written <= '0;
    end else begin
      n_final <= n_final + CW'(enc_fire && enc_last) - CW'(wr_fire && wq_data[DW]);
      if (!bursting) begin
        if (wq_count >= CW'(BURST_LEN) || n_final != '0) begin
          bursting   <= 1'b1;
          burst_sent <= '0;
        end
      end else if (wr_fire) begin
        burst_sent <= burst_sent + 1'b1;
        if (wr_last) begin
          bursting       <= 1'b0;
          bursts_written <= bursts_written + 1'b1;
        end
      end
    end
  end

  // ---------------- read side ----------------
  logic [DW-1:0]  rq_data;
  logic           rq_valid, rq_ready;
  logic [CW-1:0]  rq_count;
  logic [CW-1:0]  in_flight;
  logic [CW-1:0]  room;
  logic [PW-1:0]  want;
  logic           req_fire, rd_fire;

  stream_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_rd_fifo (
    .clk, .rst_n,
    .in_data(rd_data), .in_valid(rd_valid), .in_ready(rd_ready),
    .out_data(rq_data), .out_valid(rq_valid), .out_ready(rq_ready),
    .count(rq_count));

  always_comb begin
    room = CW'(FIFO_DEPTH) - rq_count - in_flight;
    want = (pending_beats < PW'(BURST_LEN)) ? pending_beats : PW'(BURST_LEN);
    rd_req_valid = (want != '0) && (PW'(room) >= want);
    rd_req_len   = LEN_W'(want);
  end

  assign req_fire = rd_req_valid && rd_req_ready;
  assign rd_fire  = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_flight     <= '0;
      pending_beats <= '0;
    end else begin
      in_flight     <= in_flight + (req_fire ? CW'(want) : '0) - CW'(rd_fire);
      pending_beats <= pending_beats + PW'(wr_fire) - (req_fire ? want : '0);
    end
  end

  stream_decoder #(.ENC(ENC), .W(W), .IN_W(DW), .FW_W(FW_W)) u_dec (
    .clk, .rst_n, .hcfg, .frame_words,
    .in_data(rq_data), .in_valid(rq_valid), .in_ready(rq_ready),
    .out_data, .out_valid, .out_ready);

  // Returned data never exceeds what was asked for.
  a_rd_requested: assert property (@(posedge clk) disable iff (!rst_n)
    rd_fire |-> in_flight != '0);
endmodule
