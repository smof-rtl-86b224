// smof_offchip_top: the off-chip side of a SMOF streaming accelerator.
//
// A layer-pipelined CNN accelerator keeps weights and activations on chip. Two
// mechanisms move part of them off chip without stopping the pipeline, and this
// top holds both, wired as in the UNet example of SMOF (weights of one
// convolution partly off chip, one long skip connection evicted):
//
//  * activation_eviction: the deep FIFO of a skip connection is replaced by an
//    encode -> burst FIFO -> DMA write path and a DMA read -> burst FIFO ->
//    decode path (ports skip_in_* and skip_out_*).
//  * weight_fragment_memory: a convolution's weights come partly from a static
//    on-chip memory and partly from a dynamic buffer refilled over DMA
//    (ports st_* and w_*).
//
// A layer with coarse-grain parallelism moves several words per cycle as
// parallel streams. Each stream gets its own eviction or fragmented memory,
// with its own encoder and decoder, which is why SMOF's codec cost grows with
// the number of parallel streams: ACT_LANES skip streams and WGT_LANES weight
// streams. Lane signals are packed arrays indexed by lane; with one lane each
// (the default) they are plain signals.
//
// The layers themselves (convolutions, pooling, resizing, concatenation) are
// outside this block: the skip ports and the weight ports connect to them.
// The memory side has MEM_PORTS read ports and as many write ports (one pair
// per bank, a user-chosen cap on the number of DMA ports). When the streams
// outnumber the ports they share them by time multiplexing: read channel c
// uses port c % MEM_PORTS, through a dma_read_arbiter per port, and skip lane
// a writes through port a % MEM_PORTS, through a dma_write_arbiter per port.
// Read channel ids are 0..ACT_LANES-1 for the evicted streams and
// ACT_LANES..ACT_LANES+WGT_LANES-1 for the weight streams; write ids are the
// skip lane. Ids are global, whatever port carries them. A port with no
// stream assigned is tied off. Off-chip addressing (the host-side head and tail of each evicted
// stream, the base of each weight image) is left to the memory side, which
// serves each channel's stream in order. All lanes of a kind share one Huffman
// code book (hcfg_act, hcfg_wgt) and the frame length; st_addr and st_data are
// shared by the lanes and st_we picks the lane being loaded.
//
// Timing: see the blocks; one word per cycle per stream in steady state.
module smof_offchip_top
  import smof_pkg::*;
#(
  parameter enc_e        ENC_ACT   = ENC_RLE,
  parameter enc_e        ENC_WGT   = ENC_RLE,
  parameter int unsigned BURST_LEN = BURST,
  parameter int unsigned W_DEPTH   = 4096,
  parameter int unsigned W_FRAG    = 1024,
  parameter logic [W_DEPTH/W_FRAG-1:0] W_DYN_MAP = 4'b0010,
  parameter int unsigned FW_W      = 32,
  parameter int unsigned ACT_LANES = 1,
  parameter int unsigned WGT_LANES = 1,
  parameter int unsigned MEM_PORTS = 1,
  localparam int unsigned NRD      = ACT_LANES + WGT_LANES,
  localparam int unsigned RIW      = (NRD > 1) ? $clog2(NRD) : 1,
  localparam int unsigned WIW      = (ACT_LANES > 1) ? $clog2(ACT_LANES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  huf_cfg_t                    hcfg_act,
  input  huf_cfg_t                    hcfg_wgt,
  input  logic [FW_W-1:0]             frame_words,
  // skip connection
  input  logic [ACT_LANES-1:0][WORD_W-1:0] skip_in_data,
  input  logic [ACT_LANES-1:0]        skip_in_valid,
  output logic [ACT_LANES-1:0]        skip_in_ready,
  output logic [ACT_LANES-1:0][WORD_W-1:0] skip_out_data,
  output logic [ACT_LANES-1:0]        skip_out_valid,
  input  logic [ACT_LANES-1:0]        skip_out_ready,
  // fragmented weights
  input  logic [WGT_LANES-1:0]        st_we,
  input  logic [$clog2(W_DEPTH)-1:0]  st_addr,
  input  logic [WORD_W-1:0]           st_data,
  output logic [WGT_LANES-1:0][WORD_W-1:0] w_data,
  output logic [WGT_LANES-1:0]        w_valid,
  input  logic [WGT_LANES-1:0]        w_ready,
  // shared memory write port (ACTIVATION_OUT of every skip lane)
  output logic [MEM_PORTS-1:0][DMA_W-1:0] mem_wr_data,
  output logic [MEM_PORTS-1:0]        mem_wr_valid,
  output logic [MEM_PORTS-1:0]        mem_wr_last,
  output logic [MEM_PORTS-1:0][WIW-1:0] mem_wr_id,
  input  logic [MEM_PORTS-1:0]        mem_wr_ready,
  // shared memory read port (ACTIVATION_IN and WEIGHT of every lane)
  output logic [MEM_PORTS-1:0]        mem_rd_req_valid,
  output logic [MEM_PORTS-1:0][LEN_W-1:0] mem_rd_req_len,
  output logic [MEM_PORTS-1:0][RIW-1:0] mem_rd_req_id,
  input  logic [MEM_PORTS-1:0]        mem_rd_req_ready,
  input  logic [MEM_PORTS-1:0][DMA_W-1:0] mem_rd_data,
  input  logic [MEM_PORTS-1:0]        mem_rd_valid,
  output logic [MEM_PORTS-1:0]        mem_rd_ready,
  // status
  output logic [ACT_LANES-1:0][31:0]  act_pending_beats,
  output logic [ACT_LANES-1:0][31:0]  act_bursts_written,
  output logic [WGT_LANES-1:0][31:0]  w_dyn_stall_cycles,
  output logic [WGT_LANES-1:0][31:0]  w_passes
);
  logic [NRD-1:0]                  req_valid, req_ready, port_valid, port_ready;
  logic [NRD-1:0][LEN_W-1:0]       req_len;
  logic [NRD-1:0][DMA_W-1:0]       port_data;
  logic [ACT_LANES-1:0][DMA_W-1:0] wr_data;
  logic [ACT_LANES-1:0]            wr_valid, wr_last, wr_ready;

  for (genvar a = 0; a < ACT_LANES; a++) begin : g_act
    activation_eviction #(.ENC(ENC_ACT), .W(WORD_W), .DW(DMA_W), .BURST_LEN(BURST_LEN),
                          .FW_W(FW_W), .PW(32)) u_evict (
      .clk, .rst_n, .hcfg(hcfg_act), .frame_words,
      .in_data(skip_in_data[a]), .in_valid(skip_in_valid[a]), .in_ready(skip_in_ready[a]),
      .wr_data(wr_data[a]), .wr_valid(wr_valid[a]), .wr_last(wr_last[a]),
      .wr_ready(wr_ready[a]),
      .rd_req_valid(req_valid[a]), .rd_req_len(req_len[a]), .rd_req_ready(req_ready[a]),
      .rd_data(port_data[a]), .rd_valid(port_valid[a]), .rd_ready(port_ready[a]),
      .out_data(skip_out_data[a]), .out_valid(skip_out_valid[a]),
      .out_ready(skip_out_ready[a]),
      .pending_beats(act_pending_beats[a]), .bursts_written(act_bursts_written[a]));
  end

  for (genvar g = 0; g < WGT_LANES; g++) begin : g_wgt
    localparam int unsigned C = ACT_LANES + g;
    weight_fragment_memory #(.ENC(ENC_WGT), .W(WORD_W), .DW(DMA_W), .BURST_LEN(BURST_LEN),
                             .DEPTH(W_DEPTH), .FRAG(W_FRAG), .DYN_MAP(W_DYN_MAP),
                             .SW(32)) u_wfrag (
      .clk, .rst_n, .hcfg(hcfg_wgt),
      .st_we(st_we[g]), .st_addr, .st_data,
      .w_data(w_data[g]), .w_valid(w_valid[g]), .w_ready(w_ready[g]),
      .rd_req_valid(req_valid[C]), .rd_req_len(req_len[C]), .rd_req_ready(req_ready[C]),
      .rd_data(port_data[C]), .rd_valid(port_valid[C]), .rd_ready(port_ready[C]),
      .dyn_stall_cycles(w_dyn_stall_cycles[g]), .passes(w_passes[g]));
  end

  // Memory ports: skip lane a writes through port a % MEM_PORTS, read channel
  // c reads through port c % MEM_PORTS; each port has its own arbiters, and
  // the ids it sends are the global lane / channel numbers.
  for (genvar b = 0; b < MEM_PORTS; b++) begin : g_port
    localparam int unsigned NWB  = (ACT_LANES > b) ? (ACT_LANES - b + MEM_PORTS - 1) / MEM_PORTS : 0;
    localparam int unsigned NRB  = (NRD > b) ? (NRD - b + MEM_PORTS - 1) / MEM_PORTS : 0;
    localparam int unsigned WIWB = (NWB > 1) ? $clog2(NWB) : 1;
    localparam int unsigned RIWB = (NRB > 1) ? $clog2(NRB) : 1;

    if (NWB > 0) begin : g_wr
      logic [NWB-1:0][DMA_W-1:0] d;
      logic [NWB-1:0]            v, l, r;
      logic [WIWB-1:0]           lid;
      for (genvar k = 0; k < NWB; k++) begin : g_map
        assign d[k] = wr_data[b + k * MEM_PORTS];
        assign v[k] = wr_valid[b + k * MEM_PORTS];
        assign l[k] = wr_last[b + k * MEM_PORTS];
        assign wr_ready[b + k * MEM_PORTS] = r[k];
      end
      dma_write_arbiter #(.N(NWB), .DW(DMA_W), .IW(WIWB)) u_warb (
        .clk, .rst_n,
        .port_data(d), .port_valid(v), .port_last(l), .port_ready(r),
        .bank_data(mem_wr_data[b]), .bank_valid(mem_wr_valid[b]), .bank_last(mem_wr_last[b]),
        .bank_id(lid), .bank_ready(mem_wr_ready[b]));
      assign mem_wr_id[b] = WIW'(int'(lid) * MEM_PORTS + b);
    end else begin : g_no_wr
      assign mem_wr_data[b]  = '0;
      assign mem_wr_valid[b] = 1'b0;
      assign mem_wr_last[b]  = 1'b0;
      assign mem_wr_id[b]    = '0;
    end

    if (NRB > 0) begin : g_rd
      logic [NRB-1:0]            qv, qr, pv, pr;
      logic [NRB-1:0][LEN_W-1:0] ql;
      logic [NRB-1:0][DMA_W-1:0] pd;
      logic [RIWB-1:0]           lid;
      for (genvar k = 0; k < NRB; k++) begin : g_map
        assign qv[k] = req_valid[b + k * MEM_PORTS];
        assign ql[k] = req_len[b + k * MEM_PORTS];
        assign pr[k] = port_ready[b + k * MEM_PORTS];
        assign req_ready[b + k * MEM_PORTS]  = qr[k];
        assign port_data[b + k * MEM_PORTS]  = pd[k];
        assign port_valid[b + k * MEM_PORTS] = pv[k];
      end
      dma_read_arbiter #(.N(NRB), .DW(DMA_W), .IW(RIWB)) u_rarb (
        .clk, .rst_n,
        .req_valid(qv), .req_len(ql), .req_ready(qr),
        .port_data(pd), .port_valid(pv), .port_ready(pr),
        .bank_req_valid(mem_rd_req_valid[b]), .bank_req_len(mem_rd_req_len[b]),
        .bank_req_id(lid), .bank_req_ready(mem_rd_req_ready[b]),
        .bank_data(mem_rd_data[b]), .bank_valid(mem_rd_valid[b]), .bank_ready(mem_rd_ready[b]));
      assign mem_rd_req_id[b] = RIW'(int'(lid) * MEM_PORTS + b);
    end else begin : g_no_rd
      assign mem_rd_req_valid[b] = 1'b0;
      assign mem_rd_req_len[b]   = '0;
      assign mem_rd_req_id[b]    = '0;
      assign mem_rd_ready[b]     = 1'b0;
    end
  end
endmodule
