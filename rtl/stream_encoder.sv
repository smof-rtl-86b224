// stream_encoder: the encoder placed on an outgoing DMA port, chosen at
// elaboration by ENC: word_packer (no encoding), rle_encoder or
// huffman_encoder. Words in, DMA beats out, frame end marked by `in_last`
// and echoed on the last beat as `out_last`. Timing is that of the chosen
// encoder. Only the Huffman coder uses the code-book port.
module stream_encoder
  import smof_pkg::*;
#(
  parameter enc_e        ENC   = ENC_RLE,
  parameter int unsigned W     = WORD_W,
  parameter int unsigned OUT_W = DMA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  huf_cfg_t         hcfg,
  input  logic [W-1:0]     in_data,
  input  logic             in_valid,
  input  logic             in_last,
  output logic             in_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_valid,
  output logic             out_last,
  input  logic             out_ready
);
  if (ENC == ENC_RLE) begin : g_rle
    rle_encoder #(.W(W), .OUT_W(OUT_W)) u_enc (
      .clk, .rst_n, .in_data, .in_valid, .in_last, .in_ready,
      .out_data, .out_valid, .out_last, .out_ready);
  end else if (ENC == ENC_HUFFMAN) begin : g_huf
    huffman_encoder #(.W(W), .OUT_W(OUT_W), .MAXLEN(HUF_MAXLEN)) u_enc (
      .clk, .rst_n,
      .cfg_we(hcfg.enc_we), .cfg_sym(hcfg.enc_sym), .cfg_code(hcfg.enc_code),
      .cfg_len(hcfg.enc_len),
      .in_data, .in_valid, .in_last, .in_ready,
      .out_data, .out_valid, .out_last, .out_ready);
  end else begin : g_raw
    word_packer #(.W(W), .OUT_W(OUT_W)) u_enc (
      .clk, .rst_n, .in_data, .in_valid, .in_last, .in_ready,
      .out_data, .out_valid, .out_last, .out_ready);
  end
endmodule
