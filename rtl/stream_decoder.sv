// stream_decoder: the decoder placed on an incoming DMA port, chosen at
// elaboration by ENC: word_unpacker (no encoding), rle_decoder or
// huffman_decoder. DMA beats in, words out. The unpacker and the Huffman
// decoder need the frame length to drop the padding of a frame's last beat;
// run-length tokens carry exact counts and need none. Timing is that of the
// chosen decoder.
module stream_decoder
  import smof_pkg::*;
#(
  parameter enc_e        ENC  = ENC_RLE,
  parameter int unsigned W    = WORD_W,
  parameter int unsigned IN_W = DMA_W,
  parameter int unsigned FW_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  huf_cfg_t        hcfg,
  input  logic [FW_W-1:0] frame_words,
  input  logic [IN_W-1:0] in_data,
  input  logic            in_valid,
  output logic            in_ready,
  output logic [W-1:0]    out_data,
  output logic            out_valid,
  input  logic            out_ready
);
  if (ENC == ENC_RLE) begin : g_rle
    logic unused_last;
    rle_decoder #(.W(W), .IN_W(IN_W)) u_dec (
      .clk, .rst_n, .in_data, .in_valid, .in_last(1'b0), .in_ready,
      .out_data, .out_valid, .out_last(unused_last), .out_ready);
  end else if (ENC == ENC_HUFFMAN) begin : g_huf
    logic unused_last;
    huffman_decoder #(.W(W), .IN_W(IN_W), .MAXLEN(HUF_MAXLEN), .FW_W(FW_W)) u_dec (
      .clk, .rst_n,
      .cfg_cnt_we(hcfg.cnt_we), .cfg_cnt_len(hcfg.cnt_len), .cfg_cnt_val(hcfg.cnt_val),
      .cfg_sym_we(hcfg.sym_we), .cfg_sym_idx(hcfg.sym_idx), .cfg_sym_val(hcfg.sym_val),
      .frame_words, .in_data, .in_valid, .in_ready,
      .out_data, .out_valid, .out_last(unused_last), .out_ready);
  end else begin : g_raw
    logic unused_last;
    word_unpacker #(.W(W), .IN_W(IN_W), .FW_W(FW_W)) u_dec (
      .clk, .rst_n, .frame_words, .in_data, .in_valid, .in_ready,
      .out_data, .out_valid, .out_last(unused_last), .out_ready);
  end
endmodule
