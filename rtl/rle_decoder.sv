// rle_decoder: expands run-length tokens {run-1, value} back into words.
//
// Inverse of rle_encoder. A token is taken from the DMA side and its value is
// repeated run times on the word side. The last word of a token flagged
// `in_last` is flagged `out_last`, so frame boundaries survive the round trip.
//
// Timing: one word per cycle. A new token is loaded in the same cycle as the
// last word of the previous one is sent, so a stream of single-word runs also
// flows at one word per cycle.
module rle_decoder
  import smof_pkg::*;
#(
  parameter int unsigned W    = WORD_W,
  parameter int unsigned IN_W = DMA_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IN_W-1:0] in_data,
  input  logic            in_valid,
  input  logic            in_last,
  output logic            in_ready,
  output logic [W-1:0]    out_data,
  output logic            out_valid,
  output logic            out_last,
  input  logic            out_ready
);
  localparam int unsigned RUN_W = IN_W - W;

  logic [RUN_W-1:0] remain;   // words still to send after the current one
  logic             tok_last;
  logic             done_word;

  assign done_word = !out_valid || (out_ready && remain == '0);
  assign in_ready  = done_word;
  assign out_last  = tok_last && (remain == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      remain    <= '0;
      tok_last  <= 1'b0;
    end else if (in_valid && in_ready) begin
      out_valid <= 1'b1;
      out_data  <= in_data[W-1:0];
      remain    <= in_data[IN_W-1:W];
      tok_last  <= in_last;
    end else if (out_valid && out_ready) begin
      if (remain == '0) out_valid <= 1'b0;
      else              remain    <= remain - 1'b1;
    end
  end
endmodule
