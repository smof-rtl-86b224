// rle_encoder: run-length encoder for a stream of words going off-chip.
//
// Consecutive equal words are collapsed into one token {run-1, value}; a token
// is one DMA beat, so with WORD_W = 8 and DMA_W = 16 a run of up to 256 words
// costs one beat. Runs never cross a frame: the word flagged `in_last` closes
// the current run and the token that carries it is flagged `out_last`.
// Run-length coding of the evicted activations and of the fragmented weights
// is one of the two encodings the eviction ports offer; the token layout, the
// run limit and the frame flag are this design's choices.
//
// Timing: one word accepted per cycle. A token is registered, so it appears
// the cycle after the word that ends its run. After a frame's last word the
// input stalls for one cycle while the closing token is issued.
module rle_encoder
  import smof_pkg::*;
#(
  parameter int unsigned W    = WORD_W,
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
  localparam int unsigned RUN_W = OUT_W - W;
  localparam logic [RUN_W-1:0] RUN_MAX = '1;

  logic             have_run, run_done;
  logic [W-1:0]     run_val;
  logic [RUN_W-1:0] run_cnt;     // run length minus one
  logic             out_free, extend, in_fire;

  assign out_free = !out_valid || out_ready;
  assign extend   = have_run && (in_data == run_val) && (run_cnt != RUN_MAX);
  assign in_ready = !run_done && (!have_run || extend || out_free);
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_run  <= 1'b0;
      run_done  <= 1'b0;
      run_val   <= '0;
      run_cnt   <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (run_done) begin
        if (out_free) begin
          out_data  <= {run_cnt, run_val};
          out_last  <= 1'b1;
          out_valid <= 1'b1;
          have_run  <= 1'b0;
          run_done  <= 1'b0;
        end
      end else if (in_fire) begin
        if (extend) begin
          run_cnt <= run_cnt + 1'b1;
        end else begin
          if (have_run) begin
            out_data  <= {run_cnt, run_val};
            out_last  <= 1'b0;
            out_valid <= 1'b1;
          end
          run_val <= in_data;
          run_cnt <= '0;
        end
        have_run <= 1'b1;
        run_done <= in_last;
      end
    end
  end
endmodule
