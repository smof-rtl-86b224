// weight_fragment_memory: a convolution's weight memory split into static
// on-chip fragments and a dynamic region streamed from off-chip memory.
//
// The layer reads its DEPTH weights in the same order again and again. The
// logical memory is cut into DEPTH/FRAG fragments of FRAG words; bit f of
// DYN_MAP marks fragment f as dynamic. Static fragments are packed one after
// the other into a smaller physical memory of (1-m)*DEPTH words, m being the
// dynamic share. Dynamic fragments all share one buffer of FRAG words that is
// refilled from a read-only DMA port while the static fragments are being
// read, i.e. the buffer is time-multiplexed between them. A counter of reads
// says which kind of fragment the current word comes from. This is the weight
// fragmentation scheme of SMOF; the fragment granularity, the use of a FIFO as
// the dynamic buffer and the request protocol are this design's own choices.
//
// The off-chip image holds the dynamic fragments in read order, encoded as a
// whole with ENC; the decoder frame is one pass over the dynamic fragments.
// DMA beats are asked for in bursts of BURST_LEN beats whenever the beat FIFO
// in front of the decoder has room for a whole burst; the off-chip side wraps
// around the image. rd_req_len is therefore always BURST_LEN; it is kept as
// a port so that weight and activation streams share one read interface.
//
// Static weights are written through st_we/st_addr/st_data before use (on an
// FPGA they would be part of the configuration).
//
// Timing: one weight per cycle on w_data/w_valid/w_ready, the static memory
// read being registered. If the dynamic buffer has not been refilled in time
// the output stalls; `dyn_stall_cycles` counts such cycles.
module weight_fragment_memory
  import smof_pkg::*;
#(
  parameter enc_e        ENC       = ENC_RLE,
  parameter int unsigned W         = WORD_W,
  parameter int unsigned DW        = DMA_W,
  parameter int unsigned BURST_LEN = BURST,
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned FRAG      = 1024,
  parameter logic [DEPTH/FRAG-1:0] DYN_MAP = 4'b0010,
  parameter int unsigned SW        = 32   // width of the status counters
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  huf_cfg_t                       hcfg,
  // static region load
  input  logic                           st_we,
  input  logic [$clog2(DEPTH)-1:0]       st_addr,
  input  logic [W-1:0]                   st_data,
  // weights to the convolution
  output logic [W-1:0]                   w_data,
  output logic                           w_valid,
  input  logic                           w_ready,
  // DMA_WEIGHT request and data
  output logic                           rd_req_valid,
  output logic [LEN_W-1:0]               rd_req_len,
  input  logic                           rd_req_ready,
  input  logic [DW-1:0]                  rd_data,
  input  logic                           rd_valid,
  output logic                           rd_ready,
  // status
  output logic [SW-1:0]                  dyn_stall_cycles,
  output logic [SW-1:0]                  passes
);
  localparam int unsigned NFRAG = DEPTH / FRAG;

  function automatic int unsigned count_dyn(logic [NFRAG-1:0] map);
    int unsigned n = 0;
    for (int i = 0; i < NFRAG; i++) n += map[i] ? 1 : 0;
    return n;
  endfunction

  localparam int unsigned NDYN     = count_dyn(DYN_MAP);
  localparam int unsigned S_DEPTH  = (NFRAG - NDYN) * FRAG;
  localparam int unsigned SA_W     = (S_DEPTH > 1) ? $clog2(S_DEPTH) : 1;
  localparam int unsigned AW       = $clog2(DEPTH);
  localparam int unsigned FW_W     = AW + 1;
  localparam int unsigned CW       = $clog2(BURST_LEN) + 1;
  localparam int unsigned FI_W     = (NFRAG > 1) ? $clog2(NFRAG) : 1;

  // ---------------- static region ----------------
  logic [W-1:0] st_mem [S_DEPTH];
  always_ff @(posedge clk) begin
    if (st_we) st_mem[SA_W'(st_addr)] <= st_data;
  end

  // ---------------- dynamic region: DMA -> beat FIFO -> decoder -> buffer ----
  logic [DW-1:0] bq_data;
  logic          bq_valid, bq_ready;
  logic [CW-1:0] bq_count, in_flight, room;
  logic [W-1:0]  dec_data;
  logic          dec_valid, dec_ready;
  logic [W-1:0]  dyn_data;
  logic          dyn_valid, dyn_ready;
  logic [$clog2(FRAG):0] dyn_count;

  stream_fifo #(.W(DW), .DEPTH(BURST_LEN)) u_beat_fifo (
    .clk, .rst_n,
    .in_data(rd_data), .in_valid(rd_valid), .in_ready(rd_ready),
    .out_data(bq_data), .out_valid(bq_valid), .out_ready(bq_ready),
    .count(bq_count));

  assign room         = CW'(BURST_LEN) - bq_count - in_flight;
  // no request is raised while in reset
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) running <= 1'b0;
    else        running <= 1'b1;
  end

  assign rd_req_valid = running && (room == CW'(BURST_LEN));
  assign rd_req_len   = LEN_W'(BURST_LEN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else in_flight <= in_flight + ((rd_req_valid && rd_req_ready) ? CW'(BURST_LEN) : '0)
                                - CW'(rd_valid && rd_ready);
  end

  stream_decoder #(.ENC(ENC), .W(W), .IN_W(DW), .FW_W(FW_W)) u_dec (
    .clk, .rst_n, .hcfg, .frame_words(FW_W'(NDYN * FRAG)),
    .in_data(bq_data), .in_valid(bq_valid), .in_ready(bq_ready),
    .out_data(dec_data), .out_valid(dec_valid), .out_ready(dec_ready));

  // The shared dynamic region: one fragment's worth of words.
  stream_fifo #(.W(W), .DEPTH(FRAG)) u_dyn_buf (
    .clk, .rst_n,
    .in_data(dec_data), .in_valid(dec_valid), .in_ready(dec_ready),
    .out_data(dyn_data), .out_valid(dyn_valid), .out_ready(dyn_ready),
    .count(dyn_count));

  // ---------------- read counter and output register ----------------
  logic [AW-1:0]   pos;          // logical read position
  logic [SA_W-1:0] st_raddr;     // next static physical address
  logic            cur_dyn, advance, take;

  assign cur_dyn   = DYN_MAP[FI_W'(pos / AW'(FRAG))];
  assign advance   = !w_valid || w_ready;
  assign take      = advance && (!cur_dyn || dyn_valid);
  assign dyn_ready = advance && cur_dyn;

  always_ff @(posedge clk) begin
    if (take) w_data <= cur_dyn ? dyn_data : st_mem[st_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid          <= 1'b0;
      pos              <= '0;
      st_raddr         <= '0;
      dyn_stall_cycles <= '0;
      passes           <= '0;
    end else begin
      if (advance) w_valid <= take;
      if (advance && !take) dyn_stall_cycles <= dyn_stall_cycles + 1'b1;
      if (take) begin
        if (pos == AW'(DEPTH - 1)) begin
          pos      <= '0;
          st_raddr <= '0;
          passes   <= passes + 1'b1;
        end else begin
          pos <= pos + 1'b1;
          if (!cur_dyn) st_raddr <= st_raddr + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (DEPTH % FRAG == 0) else $error("DEPTH must be a multiple of FRAG");
    assert (NDYN > 0 && NDYN < NFRAG) else $error("DYN_MAP must mark some, not all, fragments");
  end
endmodule
