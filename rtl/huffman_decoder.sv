// huffman_decoder: canonical Huffman decoder for packed DMA beats.
//
// Inverse of huffman_encoder, for a canonical code book: codes of equal length
// are consecutive integers, ordered by length. The book is given as the number
// of codes of each length (cfg_cnt_*) and the list of symbols in code order
// (cfg_sym_*). From the counts the first code and the first list index of each
// length are derived combinationally; the top MAXLEN bits of the bit
// accumulator are then compared against every length at once and the shortest
// match gives the symbol.
//
// Beats carry no frame marker, so the decoder counts `frame_words` symbols.
// After the last symbol of a frame the padding left in its beat is dropped;
// whole beats already loaded behind it are kept for the next frame.
//
// Timing: one word per cycle while bits are available; a beat is accepted when
// at most MAXLEN bits are buffered. The output is combinational from the
// accumulator.
module huffman_decoder
  import smof_pkg::*;
#(
  parameter int unsigned W      = WORD_W,
  parameter int unsigned IN_W   = DMA_W,
  parameter int unsigned MAXLEN = HUF_MAXLEN,
  parameter int unsigned FW_W   = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // code book
  input  logic                          cfg_cnt_we,
  input  logic [$clog2(MAXLEN+1)-1:0]   cfg_cnt_len,
  input  logic [W:0]                    cfg_cnt_val,
  input  logic                          cfg_sym_we,
  input  logic [W-1:0]                  cfg_sym_idx,
  input  logic [W-1:0]                  cfg_sym_val,
  // words per frame
  input  logic [FW_W-1:0]               frame_words,
  // packed beats in
  input  logic [IN_W-1:0]               in_data,
  input  logic                          in_valid,
  output logic                          in_ready,
  // words out
  output logic [W-1:0]                  out_data,
  output logic                          out_valid,
  output logic                          out_last,
  input  logic                          out_ready
);
  localparam int unsigned LW    = $clog2(MAXLEN+1);
  localparam int unsigned ACC_W = IN_W + MAXLEN;
  localparam int unsigned NW    = $clog2(ACC_W+1);

  logic [W:0]        cnt_tab [MAXLEN+1];
  logic [W-1:0]      sym_tab [2**W];
  logic [ACC_W-1:0]  acc;
  logic [NW-1:0]     nbits, n_after;
  logic [FW_W-1:0]   sym_count;
  logic [MAXLEN-1:0] win;
  logic [LW-1:0]     mlen;
  logic [W-1:0]      midx;
  logic              out_fire, in_fire;

  always_ff @(posedge clk) begin
    if (cfg_cnt_we) cnt_tab[cfg_cnt_len] <= cfg_cnt_val;
    if (cfg_sym_we) sym_tab[cfg_sym_idx] <= cfg_sym_val;
  end

  // Shortest canonical code that matches the head of the bit buffer.
  always_comb begin
    logic [MAXLEN:0] fc, code_l;
    logic [W:0]      idx;
    logic            found;
    if (nbits >= NW'(MAXLEN)) win = MAXLEN'(acc >> (nbits - NW'(MAXLEN)));
    else                      win = MAXLEN'(acc << (NW'(MAXLEN) - nbits));
    fc    = '0;
    idx   = '0;
    found = 1'b0;
    mlen  = '0;
    midx  = '0;
    for (int l = 1; l <= MAXLEN; l++) begin
      code_l = (MAXLEN+1)'(win >> (MAXLEN - l));
      if (!found && (NW'(l) <= nbits) && (code_l >= fc) &&
          (code_l - fc < (MAXLEN+1)'(cnt_tab[l]))) begin
        found = 1'b1;
        mlen  = LW'(l);
        midx  = W'(idx + (W+1)'(code_l - fc));
      end
      idx = idx + cnt_tab[l];
      fc  = (fc + (MAXLEN+1)'(cnt_tab[l])) << 1;
    end
    out_valid = found;
    out_data  = sym_tab[midx];
    out_last  = (sym_count == frame_words - 1'b1);
    out_fire  = out_valid && out_ready;
    in_ready  = (nbits <= NW'(MAXLEN));
    in_fire   = in_valid && in_ready;
    // bits left after this cycle's symbol, before a new beat is added
    if (!out_fire)     n_after = nbits;
    else if (out_last) n_after = (nbits - NW'(mlen)) & ~NW'(IN_W-1);  // drop padding
    else               n_after = nbits - NW'(mlen);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      nbits     <= '0;
      sym_count <= '0;
    end else begin
      if (in_fire) begin
        acc   <= (acc << IN_W) | ACC_W'(in_data);
        nbits <= n_after + NW'(IN_W);
      end else begin
        nbits <= n_after;
      end
      if (out_fire) sym_count <= out_last ? '0 : sym_count + 1'b1;
    end
  end

  initial assert ((IN_W & (IN_W-1)) == 0) else $error("IN_W must be a power of two");
endmodule
