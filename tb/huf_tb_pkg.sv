// huf_tb_pkg: a canonical Huffman code book for the testbenches and a
// reference bit packer.
//
// Code lengths: word 0 gets 1 bit (ReLU outputs are mostly zero), words 1..3
// get 4 bits, all others 10 bits. Canonical codes are assigned in order of
// (length, word): the first code of length L+1 is (first code of L + number of
// codes of L) << 1.
package huf_tb_pkg;
  localparam int MAXLEN = 12;

  function automatic int len_of(int s);
    return (s == 0) ? 1 : (s < 4) ? 4 : 10;
  endfunction

  function automatic int count_of(int l);
    int n = 0;
    for (int s = 0; s < 256; s++) if (len_of(s) == l) n++;
    return n;
  endfunction

  function automatic int code_of(int s);
    int code = 0;
    for (int l = 1; l <= MAXLEN; l++) begin
      for (int t = 0; t < 256; t++)
        if (len_of(t) == l) begin
          if (t == s) return code;
          code++;
        end
      code = code << 1;
    end
    return -1;
  endfunction

  // word at position `rank` of the canonical order
  function automatic int sym_at(int rank);
    int r = 0;
    for (int l = 1; l <= MAXLEN; l++)
      for (int t = 0; t < 256; t++)
        if (len_of(t) == l) begin
          if (r == rank) return t;
          r++;
        end
    return 0;
  endfunction

  // Encode one frame of words into 16-bit beats, MSB first, zero padded.
  function automatic void encode_frame(input byte unsigned words[$], ref logic [15:0] beats[$]);
    logic [15:0] cur = '0;
    int nb = 0;
    foreach (words[i]) begin
      int l = len_of(words[i]);
      int c = code_of(words[i]);
      for (int b = l - 1; b >= 0; b--) begin
        cur = {cur[14:0], 1'(c >> b)};
        nb++;
        if (nb == 16) begin beats.push_back(cur); cur = '0; nb = 0; end
      end
    end
    if (nb > 0) beats.push_back(cur << (16 - nb));
  endfunction
endpackage
