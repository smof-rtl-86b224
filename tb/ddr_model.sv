// ddr_model: behavioural model of an off-chip memory bank as seen by the
// accelerator's DMA ports (not synthesizable; testbench use only).
//
// Channels 0..NQ-1 behave like evicted-activation areas: beats written on the
// write port with wr_id = c are appended to queue c, and read requests for
// channel c pop them in order, as the host's head and tail pointers would.
// Channels NQ..NQ+NI-1 each hold a read-only image (loaded with load_image)
// that read requests walk through cyclically, as the weight image of a
// fragmented memory is re-read every pass. Requests are served one at a time
// after LAT cycles; `slow` makes the model insert a gap cycle between beats
// and accept writes on only WR_PCT% of cycles, to create back-pressure (or to
// stand for a limited write bandwidth); `hold` pauses the returned data.
module ddr_model #(
  parameter int unsigned DW    = 16,
  parameter int unsigned LEN_W = 8,
  parameter int unsigned LAT   = 8,
  parameter int unsigned NQ    = 1,
  parameter int unsigned NI    = 1,
  parameter int unsigned IW    = 1,
  parameter int unsigned WIW   = 1,
  parameter int unsigned WR_PCT = 25     // writes accepted per 100 cycles while `slow`
) (
  input  logic             clk,
  input  logic             slow,
  input  logic             hold,
  input  logic [DW-1:0]    wr_data,
  input  logic             wr_valid,
  input  logic [WIW-1:0]   wr_id,
  output logic             wr_ready,
  input  logic             req_valid,
  input  logic [LEN_W-1:0] req_len,
  input  logic [IW-1:0]    req_id,
  output logic             req_ready,
  output logic [DW-1:0]    rd_data,
  output logic             rd_valid,
  input  logic             rd_ready
);
  logic [DW-1:0] q   [NQ][$];
  logic [DW-1:0] img [NI][$];
  int unsigned   img_ptr [NI];
  int unsigned   underflows = 0;
  int unsigned   max_fill = 0;       // largest total queued, over all queues
  int unsigned   words_written = 0;
  int unsigned   written [NQ];
  int unsigned   reqs [NQ + NI];
  int unsigned   bad_ids = 0;

  logic          busy = 1'b0;
  int unsigned   cur_id = 0;
  int unsigned   remain = 0;
  int unsigned   wait_cnt = 0;
  logic          gap = 1'b0;

  initial begin
    for (int c = 0; c < int'(NI); c++) img_ptr[c] = 0;
    for (int c = 0; c < int'(NQ); c++) written[c] = 0;
    for (int c = 0; c < int'(NQ + NI); c++) reqs[c] = 0;
  end

  // Append one beat to the image of read channel ch (NQ <= ch < NQ+NI).
  function automatic void load_image(int unsigned ch, logic [DW-1:0] beat);
    img[ch - NQ].push_back(beat);
  endfunction

  function automatic int unsigned total_queued();
    int unsigned t;
    t = 0;
    for (int c = 0; c < int'(NQ); c++) t += q[c].size();
    return t;
  endfunction

  function automatic logic [DW-1:0] peek();
    if (cur_id < NQ) return (q[cur_id].size() > 0) ? q[cur_id][0] : '0;
    if (cur_id < NQ + NI && img[cur_id - NQ].size() > 0)
      return img[cur_id - NQ][img_ptr[cur_id - NQ]];
    return '0;
  endfunction

  always_comb begin
    req_ready = !busy;
    rd_valid  = busy && (wait_cnt == 0) && !gap && !hold;
  end

  initial wr_ready = 1'b1;

  always @(posedge clk) begin
    wr_ready <= slow ? ($urandom_range(0, 99) < WR_PCT) : 1'b1;
    if (wr_valid && wr_ready) begin
      if (wr_id < NQ) begin
        q[wr_id].push_back(wr_data);
        written[wr_id]++;
      end else bad_ids++;
      words_written++;
      if (total_queued() > max_fill) max_fill = total_queued();
    end
    if (!busy && req_valid) begin
      busy     <= 1'b1;
      remain   = req_len;
      wait_cnt = LAT;
      cur_id   = req_id;
      if (cur_id < NQ + NI) reqs[cur_id]++;
      else bad_ids++;
    end else if (busy) begin
      if (wait_cnt > 0) wait_cnt--;
      else if (rd_valid && rd_ready) begin
        if (cur_id < NQ) begin
          if (q[cur_id].size() > 0) void'(q[cur_id].pop_front());
          else underflows++;
        end else if (cur_id < NQ + NI) begin
          img_ptr[cur_id - NQ] = (img_ptr[cur_id - NQ] + 1 == img[cur_id - NQ].size())
                               ? 0 : img_ptr[cur_id - NQ] + 1;
        end
        remain--;
        if (remain == 0) busy <= 1'b0;
      end
    end
    gap <= slow ? !gap : 1'b0;
    rd_data <= peek();
  end
endmodule
