// word_packer: packs OUT_W/W words into one DMA beat when a port carries no
// encoding.
//
// Words fill the beat from the least significant slot up. A beat is sent when
// it is full or when the frame's last word (`in_last`) has been placed; the
// unused slots of such a short beat are zero and the beat is flagged
// `out_last`. Timing: one word per cycle; the beat is registered and can be
// sent in the same cycle as the first word of the next beat is taken.
module word_packer
  import smof_pkg::*;
#(
  parameter int unsigned W     = WORD_W,
  parameter int unsigned OUT_W = DMA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     in_data,
  input  logic             in_valid,
  input  logic             in_last,
  output logic             in_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_valid,
  output logic             out_last,
  input  logic             out_ready
);
  localparam int unsigned K  = OUT_W / W;
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  logic [OUT_W-1:0] buf_q;
  logic [KW-1:0]    slot;
  logic             out_free;

  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      slot      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_last || slot == KW'(K-1)) begin
          out_data  <= buf_q | (OUT_W'(in_data) << (slot * W));
          out_valid <= 1'b1;
          out_last  <= in_last;
          buf_q     <= '0;
          slot      <= '0;
        end else begin
          buf_q <= buf_q | (OUT_W'(in_data) << (slot * W));
          slot  <= slot + 1'b1;
        end
      end
    end
  end
endmodule
