// smof_pkg: types and constants shared by the off-chip eviction datapath.
//
// Word widths follow the 8-bit quantisation used for both weights and activations
// (activations 8-bit fixed point, weights 8-bit block floating point). The DMA
// beat width, the burst length and the encoding enumeration are this design's
// own choices; the three encoding options (none, run-length, Huffman) are the
// ones the eviction and fragmentation ports can be built with.
package smof_pkg;

  // Encoding applied on a DMA port.
  typedef enum logic [1:0] {
    ENC_NONE    = 2'd0,
    ENC_RLE     = 2'd1,
    ENC_HUFFMAN = 2'd2
  } enc_e;

  localparam int unsigned WORD_W  = 8;   // activation / weight word
  localparam int unsigned DMA_W   = 16;  // one DMA beat
  localparam int unsigned BURST   = 16;  // beats per DMA burst
  localparam int unsigned LEN_W   = 8;   // width of a burst-length field
  localparam int unsigned HUF_MAXLEN = 12; // longest Huffman code

  // Huffman code-book load port, shared by encoders and decoders. The encoder
  // takes (sym, code, len); the decoder takes the per-length code counts and
  // the symbol list in canonical order.
  typedef struct packed {
    logic                          enc_we;
    logic [WORD_W-1:0]             enc_sym;
    logic [HUF_MAXLEN-1:0]         enc_code;
    logic [$clog2(HUF_MAXLEN+1)-1:0] enc_len;
    logic                          cnt_we;
    logic [$clog2(HUF_MAXLEN+1)-1:0] cnt_len;
    logic [WORD_W:0]               cnt_val;
    logic                          sym_we;
    logic [WORD_W-1:0]             sym_idx;
    logic [WORD_W-1:0]             sym_val;
  } huf_cfg_t;

endpackage
