// word_unpacker: splits DMA beats back into words when a port carries no
// encoding.
//
// Inverse of word_packer. Slots are sent from the least significant one up.
// Beats carry no frame marker, so the unpacker counts `frame_words` words and
// drops the unused slots of the frame's last, short beat. Timing: one word per
// cycle; the next beat is taken in the cycle the current one's last word goes.
module word_unpacker
  import smof_pkg::*;
#(
  parameter int unsigned W    = WORD_W,
  parameter int unsigned IN_W = DMA_W,
  parameter int unsigned FW_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [FW_W-1:0] frame_words,
  input  logic [IN_W-1:0] in_data,
  input  logic            in_valid,
  output logic            in_ready,
  output logic [W-1:0]    out_data,
  output logic            out_valid,
  output logic            out_last,
  input  logic            out_ready
);
  localparam int unsigned K  = IN_W / W;
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  logic [IN_W-1:0] beat;
  logic [KW-1:0]   slot;
  logic [FW_W-1:0] wcount;
  logic            beat_done;

  assign out_data  = beat[slot*W +: W];
  assign out_last  = (wcount == frame_words - 1'b1);
  assign beat_done = out_last || (slot == KW'(K-1));
  assign in_ready  = !out_valid || (out_ready && beat_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      slot      <= '0;
      wcount    <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        wcount <= out_last ? '0 : wcount + 1'b1;
        slot   <= beat_done ? '0 : slot + 1'b1;
        if (beat_done) out_valid <= 1'b0;
      end
      if (in_valid && in_ready) begin
        beat      <= in_data;
        out_valid <= 1'b1;
      end
    end
  end
endmodule
