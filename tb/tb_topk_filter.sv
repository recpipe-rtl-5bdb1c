// tb_topk_filter: streams random CTR scores (one per cycle) into a filter
// with a 64-entry id buffer, then drains with several k. Checked against a
// reference worked out here: bin counters, the number of scores under the
// 0.5 threshold, the cut-off bin (highest bins holding at least k ids, or
// every stored id if fewer passed), the exact set of ids sent, that the
// highest bin comes out first, and the drain time (one cycle per id plus
// one per bin passed, plus two). A second round after 'clear' also fills the
// buffer past its size to check the overflow counter.
module tb_topk_filter;
  import rp_pkg::*;
  localparam int ITEMS = 64, NB = 16, TH = 128;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, drain_start, out_valid, out_ready, busy, done;
  item_t in_item, out_item;
  ctr_t in_ctr;
  logic [ITEM_W:0] k, bin_count [NB], n_skipped, n_dropped;
  int checks = 0, failures = 0;

  topk_filter #(.ITEMS(ITEMS), .NB(NB), .THRESH(TH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ctr_t ctr_of [int];
  int   n_items;
  // output monitor, sampled at the clock edge
  bit   got [int];
  int   nout, prev_bin;
  bit   order_ok;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int id = int'(out_item);
    nout++;
    if (!ctr_of.exists(id)) failures++;
    else begin
      if (ctr_of[id]/16 > prev_bin) order_ok = 0;
      prev_bin = ctr_of[id]/16;
      got[id] = 1;
    end
  end

  task automatic feed(input int n, input int seed_bias);
    n_items = n;
    ctr_of.delete();
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_item  = item_t'(1000 + i);
      in_ctr   = ctr_t'(($urandom % 256) | seed_bias);
      ctr_of[1000 + i] = in_ctr;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic check_counts();
    int cnt [NB]; int skip = 0, stored = 0, drop = 0;
    for (int b = 0; b < NB; b++) cnt[b] = 0;
    foreach (ctr_of[id]) begin
      cnt[ctr_of[id] / 16]++;
      if (ctr_of[id] < TH) skip++;
      else if (stored < ITEMS) stored++;
      else drop++;
    end
    for (int b = 0; b < NB; b++) begin
      checks++; if (int'(bin_count[b]) != cnt[b]) failures++;
    end
    checks++; if (int'(n_skipped) != skip) failures++;
    checks++; if (int'(n_dropped) != drop) begin failures++; $display("dropped %0d exp %0d", n_dropped, drop); end
  endtask

  task automatic drain_and_check(input int kk, input int stall = 0);
    int lcnt [NB]; int cut, sum, ncyc, stored;
    got.delete(); nout = 0; prev_bin = NB; order_ok = 1;
    // reference: ids stored in arrival order until the buffer is full
    for (int b = 0; b < NB; b++) lcnt[b] = 0;
    stored = 0;
    for (int i = 0; i < n_items; i++)
      if (ctr_of[1000+i] >= TH && stored < ITEMS) begin lcnt[ctr_of[1000+i]/16]++; stored++; end
    cut = TH/16; sum = 0;
    for (int b = NB-1; b >= TH/16; b--) begin
      sum += lcnt[b];
      if (sum >= kk) begin cut = b; break; end
    end
    k = (ITEM_W+1)'(kk);
    @(negedge clk);
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    ncyc = 1;
    while (!done) begin
      @(negedge clk);
      ncyc++;
    end
    // expected set: all stored ids in bins >= cut
    begin
      int exp_n = 0; stored = 0;
      for (int i = 0; i < n_items; i++)
        if (ctr_of[1000+i] >= TH && stored < ITEMS) begin
          stored++;
          if (ctr_of[1000+i]/16 >= cut) begin
            exp_n++;
            checks++; if (!got.exists(1000+i)) failures++;
          end
        end
      checks++; if (nout != exp_n) begin failures++; $display("sent %0d exp %0d", nout, exp_n); end
      checks++; if (!(nout >= kk || stored < kk)) failures++;
      checks++; if (!order_ok) failures++;
      checks++; if (ncyc > nout + (NB - cut) + 2 + stall) begin
        failures++; $display("drain took %0d cycles for %0d ids", ncyc, nout);
      end
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; drain_start = 0; out_ready = 1; in_item = 0; in_ctr = 0; k = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    feed(60, 0);
    check_counts();
    drain_and_check(8);
    drain_and_check(20);
    drain_and_check(1);
    drain_and_check(200);   // more than stored: everything above threshold
    // second round: clear, then more passing scores than the buffer holds
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    feed(90, 8'h80);
    check_counts();
    out_ready = 0;  // backpressure for a while
    fork
      drain_and_check(30, 5);
      begin repeat (5) @(negedge clk); out_ready = 1; end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
