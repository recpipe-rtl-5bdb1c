// topk_filter: streaming, approximate top-k filter placed after each
// sub-array. It replaces sorting by bucketing, as the paper proposes:
//  * the CTR range [0,1) is split into NB equal bins (16 by default; bin b
//    holds codes b*256/NB .. (b+1)*256/NB-1 of the 8-bit CTR);
//  * every cycle one (item id, CTR) pair may arrive; the bin counter is
//    incremented and, if the CTR is at least THRESH (0.5 by default), the
//    id is appended to that bin's list in the id buffer. Ids below the
//    threshold are only counted, which keeps the buffer small;
//  * on drain_start the filter picks the highest bins whose counts add up
//    to at least k and streams their ids out (valid/ready), highest bin
//    first, one id per cycle. The result is "at least top-k", unordered
//    inside a bin, exactly as the paper describes; if fewer than k ids
//    passed the threshold, all stored ids are sent.
// The per-bin lists are singly linked lists in one ITEMS-entry buffer
// (id + next pointer); the paper keeps the ids in a reserved part of the
// weight SRAM, here the buffer is local to the filter. The linked-list
// organisation, handshakes and widths are this design's.
// Timing: input accepted every cycle (no backpressure). Drain latency is
// one cycle to start plus one cycle per id sent plus one cycle per bin
// passed over.
module topk_filter
  import rp_pkg::*;
#(
  parameter int unsigned ITEMS  = 4096,
  parameter int unsigned NB     = NBINS,
  parameter int unsigned THRESH = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,        // start a new query / sub-batch
  input  logic        in_valid,
  input  item_t       in_item,
  input  ctr_t        in_ctr,
  input  logic [ITEM_W:0] k,
  input  logic        drain_start,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item,
  output logic        busy,         // draining
  output logic        done,         // one-cycle pulse when a drain ends
  output logic [ITEM_W:0] bin_count [NB],
  output logic [ITEM_W:0] n_skipped,  // scores under the threshold
  output logic [ITEM_W:0] n_dropped   // ids lost to a full buffer
);
  localparam int unsigned BW       = $clog2(NB);
  localparam int unsigned PW       = $clog2(ITEMS);
  localparam int unsigned FIRST    = THRESH / (256 / NB);  // lowest stored bin

  item_t         ids  [ITEMS];
  logic [PW-1:0] nxt  [ITEMS];
  logic [PW-1:0] head [NB];
  logic [PW-1:0] tail [NB];
  logic [ITEM_W:0] lcnt [NB];      // ids actually stored per bin
  logic [PW:0]   wr_ptr;

  logic [BW-1:0] in_bin;
  logic          store;
  assign in_bin = in_ctr[CTR_W-1 -: BW];
  assign store  = in_valid && (in_ctr >= ctr_t'(THRESH)) && (wr_ptr < (PW+1)'(ITEMS));

  // ------------------------------------------------------------- insertion
  always_ff @(posedge clk) begin
    if (store) begin
      ids[wr_ptr[PW-1:0]] <= in_item;
      if (lcnt[in_bin] != 0) nxt[tail[in_bin]] <= wr_ptr[PW-1:0];
    end
  end

  // ------------------------------------------------- cut-off bin for drain
  logic [BW-1:0] cut_c;
  always_comb begin
    automatic logic [ITEM_W+1:0] sum = '0;
    automatic logic              hit = 1'b0;
    cut_c = BW'(FIRST);
    for (int b = NB-1; b >= int'(FIRST); b--) begin
      sum = sum + (ITEM_W+2)'(lcnt[b]);
      if (!hit && sum >= (ITEM_W+2)'(k)) begin
        cut_c = BW'(b);
        hit   = 1'b1;
      end
    end
  end

  // ------------------------------------------------------------------ drain
  typedef enum logic {D_IDLE, D_RUN} dstate_e;
  dstate_e         dstate;
  logic [BW-1:0]   cur_bin, cut_q;
  logic [PW-1:0]   ptr;
  logic [ITEM_W:0] rem;

  assign busy      = (dstate == D_RUN);
  assign out_valid = (dstate == D_RUN) && (rem != 0);
  assign out_item  = ids[ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      n_skipped <= '0;
      n_dropped <= '0;
      for (int b = 0; b < NB; b++) begin
        bin_count[b] <= '0;
        lcnt[b]      <= '0;
        head[b]      <= '0;
        tail[b]      <= '0;
      end
      dstate  <= D_IDLE;
      cur_bin <= '0;
      cut_q   <= '0;
      ptr     <= '0;
      rem     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        wr_ptr    <= '0;
        n_skipped <= '0;
        n_dropped <= '0;
        for (int b = 0; b < NB; b++) begin
          bin_count[b] <= '0;
          lcnt[b]      <= '0;
        end
      end else if (in_valid) begin
        bin_count[in_bin] <= bin_count[in_bin] + 1'b1;
        if (in_ctr < ctr_t'(THRESH)) n_skipped <= n_skipped + 1'b1;
        else if (!store)             n_dropped <= n_dropped + 1'b1;
        if (store) begin
          if (lcnt[in_bin] == 0) head[in_bin] <= wr_ptr[PW-1:0];
          tail[in_bin] <= wr_ptr[PW-1:0];
          lcnt[in_bin] <= lcnt[in_bin] + 1'b1;
          wr_ptr       <= wr_ptr + 1'b1;
        end
      end

      unique case (dstate)
        D_IDLE: if (drain_start) begin
          dstate  <= D_RUN;
          cut_q   <= cut_c;
          cur_bin <= BW'(NB-1);
          ptr     <= head[NB-1];
          rem     <= lcnt[NB-1];
        end
        D_RUN: begin
          if (rem == 0) begin
            if (cur_bin == cut_q) begin
              dstate <= D_IDLE;
              done   <= 1'b1;
            end else begin
              cur_bin <= cur_bin - 1'b1;
              ptr     <= head[cur_bin - 1'b1];
              rem     <= lcnt[cur_bin - 1'b1];
            end
          end else if (out_ready) begin
            ptr <= nxt[ptr];
            rem <= rem - 1'b1;
          end
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  a_no_input_while_draining: assert property (@(posedge clk)
      !(rst_n && busy && in_valid))
    else $error("topk_filter: scores arrived during a drain");
endmodule
