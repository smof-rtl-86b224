// huffman_encoder: per-word Huffman coder with bit packing into DMA beats.
//
// Every word is coded on its own (no context), as a prefix-free code of 1 to
// MAXLEN bits looked up in a table of 2^W entries. The table is written through
// the cfg_* port before streaming starts, since the code book is built offline
// from the statistics of the data. Codes are stored right-aligned and sent most
// significant bit first. The bits are collected in an accumulator and sent as
// OUT_W-bit beats, the oldest bit in the beat's MSB. The word flagged `in_last`
// closes the frame: the partial beat left over is padded with zeros at the
// bottom and sent flagged `out_last`. The table organisation, the packing order
// and the padding are this design's own choices.
//
// Timing: one word per cycle while the output keeps up; the table read is
// combinational. After a frame's last word, input is held until the
// accumulator has been emptied.
module huffman_encoder
  import smof_pkg::*;
#(
  parameter int unsigned W      = WORD_W,
  parameter int unsigned OUT_W  = DMA_W,
  parameter int unsigned MAXLEN = HUF_MAXLEN
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // code book
  input  logic                          cfg_we,
  input  logic [W-1:0]                  cfg_sym,
  input  logic [MAXLEN-1:0]             cfg_code,
  input  logic [$clog2(MAXLEN+1)-1:0]   cfg_len,
  // words in
  input  logic [W-1:0]                  in_data,
  input  logic                          in_valid,
  input  logic                          in_last,
  output logic                          in_ready,
  // packed beats out
  output logic [OUT_W-1:0]              out_data,
  output logic                          out_valid,
  output logic                          out_last,
  input  logic                          out_ready
);
  localparam int unsigned LW    = $clog2(MAXLEN+1);
  localparam int unsigned ACC_W = OUT_W + MAXLEN;
  localparam int unsigned NW    = $clog2(ACC_W+1);

  logic [MAXLEN-1:0] code_tab [2**W];
  logic [LW-1:0]     len_tab  [2**W];

  logic [ACC_W-1:0]  acc;
  logic [NW-1:0]     nbits, n_after;
  logic              flushing;
  logic              out_fire, in_fire;
  logic [MAXLEN-1:0] code;
  logic [LW-1:0]     len;
  logic [ACC_W-1:0]  shifted;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      code_tab[cfg_sym] <= cfg_code;
      len_tab[cfg_sym]  <= cfg_len;
    end
  end

  assign code = code_tab[in_data];
  assign len  = len_tab[in_data];

  always_comb begin
    out_valid = (nbits >= NW'(OUT_W)) || (flushing && nbits != '0);
    out_last  = flushing && (nbits <= NW'(OUT_W));
    if (nbits >= NW'(OUT_W)) shifted = acc >> (nbits - NW'(OUT_W));
    else                     shifted = acc << (NW'(OUT_W) - nbits);
    out_data  = shifted[OUT_W-1:0];
    out_fire  = out_valid && out_ready;
    if (!out_fire)                    n_after = nbits;
    else if (nbits >= NW'(OUT_W))     n_after = nbits - NW'(OUT_W);
    else                              n_after = '0;
    in_ready  = !flushing && (n_after < NW'(OUT_W));
    in_fire   = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      nbits    <= '0;
      flushing <= 1'b0;
    end else begin
      if (in_fire) begin
        acc      <= (acc << len) | ACC_W'(code & (MAXLEN'({MAXLEN{1'b1}}) >> (LW'(MAXLEN) - len)));
        nbits    <= n_after + NW'(len);
        flushing <= in_last;
      end else begin
        nbits <= n_after;
        if (out_fire && out_last) flushing <= 1'b0;
      end
    end
  end

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    in_fire |-> len != '0);
endmodule
