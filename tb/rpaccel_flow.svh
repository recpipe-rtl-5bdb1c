// rpaccel_flow.svh: end-to-end test program for rpaccel, included inside a
// testbench module that declares NT, N, SB (items per sub-batch), the DUT
// signals and the DRAM model. It acts as the host:
//  1. Monolithic mode: the whole array is fused into one sub-array owned by
//     engine 0, a one-layer model scores SB items written by the host, and
//     the top-k filter drains the best ids.
//  2. Multi-stage mode (mode switch): tile 0 is a frontend sub-array
//     (engine 0), tiles (0,1)+(1,1) are fused into a 2N x N backend
//     sub-array (engine 1), and tile (1,0) runs a second frontend query
//     (engine NT) at the same time. A query of 4*SB items is split into 4
//     sub-batches. The frontend gathers the embedding lines of the query
//     (static hits or DRAM misses); for each sub-batch it runs two layers,
//     filters the top
//     k/4 and forwards the survivors to the gather unit as backend
//     prefetches. The backend thread meanwhile takes the survivors of the
//     previous sub-batch, gathers their backend lines (look-ahead hits),
//     runs two layers and feeds one top-k filter for the whole query,
//     drained at the end.
// Every CTR, every filtered id set and the final ranking are predicted here
// from the weights, the DRAM contents and the bucketing rule; counters
// record each mechanism, and a mechanism that never happened is a failure.

localparam int NE  = NT*NT;
localparam int Q   = 4 * SB;          // items per query
localparam int KF  = SB / 2;          // frontend k per sub-batch (k/n)
localparam int KB  = SB;              // backend k for the query
localparam int BE_BASE = 100000;      // backend embedding table base line
localparam int SH1 = 3;               // hidden-layer shift

int checks = 0, failures = 0;
int cnt_static_hit, cnt_la_hit, cnt_miss, cnt_prefetch, cnt_fwd, cnt_skip,
    cnt_overlap, cnt_concurrent, cnt_mode_switch, cnt_backpressure;

data_t WF1 [N][N], WF2 [N], WB1 [2*N][N], WB2 [N], WM [NT*N];
semaphore emb_port = new(1);

always @(posedge clk) begin
  if (eng_busy[0] && eng_busy[1]) cnt_overlap++;
  if (eng_busy[0] && eng_busy[NT]) cnt_concurrent++;
  if (topn_valid && !topn_ready) cnt_backpressure++;
end
// the host is slow now and then
always @(negedge clk) topn_ready <= ($urandom % 5) != 0;

// ------------------------------------------------------------ reference
function automatic int sig_ref(input longint v);
  real x = real'(v) / 256.0;
  real ax = (x < 0) ? -x : x;
  real y;
  if (ax >= 5.0)        y = 1.0;
  else if (ax >= 2.375) y = 0.03125 * ax + 0.84375;
  else if (ax >= 1.0)   y = 0.125 * ax + 0.625;
  else                  y = 0.25 * ax + 0.5;
  y = $floor(y * 256.0 + 1e-9);
  if (x < 0) y = 256.0 - y;
  return (y > 255.0) ? 255 : int'(y);
endfunction

function automatic int relu_q(input longint v, input int sh);
  longint q = v >>> sh;
  return (q < 0) ? 0 : (q > 127) ? 127 : int'(q);
endfunction

function automatic data_t lbyte(input line_t l, input int i);
  return data_t'(l[i*8 +: 8]);
endfunction

function automatic int fe_ctr(input int item);
  line_t x = tb_pkg::dram_line(emb_id_t'(item));
  longint s2 = 0;
  for (int j = 0; j < N; j++) begin
    longint s1 = 0;
    for (int r = 0; r < N; r++) s1 += longint'(WF1[r][j]) * longint'(lbyte(x, r));
    s2 += longint'(WF2[j]) * relu_q(s1, SH1);
  end
  return sig_ref(s2);
endfunction

function automatic int be_ctr(input int item);
  line_t x = tb_pkg::dram_line(emb_id_t'(BE_BASE + item));
  longint s2 = 0;
  for (int j = 0; j < N; j++) begin
    longint s1 = 0;
    for (int r = 0; r < 2*N; r++) s1 += longint'(WB1[r][j]) * longint'(lbyte(x, r));
    s2 += longint'(WB2[j]) * relu_q(s1, SH1);
  end
  return sig_ref(s2);
endfunction

// expected output of a top-k filter (ids in arrival order with their CTR)
function automatic void topk_ref(input int ids [$], input int ctrs [$], input int k,
                                 ref bit exp [int]);
  int cnt [16]; int cut = 8, sum = 0;
  for (int b = 0; b < 16; b++) cnt[b] = 0;
  foreach (ctrs[i]) if (ctrs[i] >= 128) cnt[ctrs[i] / 16]++;
  for (int b = 15; b >= 8; b--) begin sum += cnt[b]; if (sum >= k) begin cut = b; break; end end
  exp.delete();
  foreach (ids[i]) if (ctrs[i] >= 128 && ctrs[i] / 16 >= cut) exp[ids[i]] = 1;
endfunction

// ------------------------------------------------------------ host I/O
task automatic write_w(input int e, input int addr, input line_t d);
  @(negedge clk);
  w_wr_en = 1; w_wr_eng = ENG_IDX_W'(e); w_wr_addr = ENG_WAW'(addr); w_wr_data = d;
  @(negedge clk);
  w_wr_en = 0;
endtask

task automatic write_act(input int e, input int addr, input line_t d);
  @(negedge clk);
  h_act_wr_en = 1; h_act_wr_eng = ENG_IDX_W'(e); h_act_wr_addr = ENG_AW'(addr); h_act_wr_data = d;
  @(posedge clk);
  while (!h_act_wr_ready) @(posedge clk);
  @(negedge clk);
  h_act_wr_en = 0;
endtask

task automatic command(input int e, input eng_cmd_t c);
  @(negedge clk);
  eng_cmd[e] = c; eng_cmd_valid[e] = 1;
  @(posedge clk);
  while (!eng_cmd_ready[e]) @(posedge clk);
  @(negedge clk);
  eng_cmd_valid[e] = 0;
  while (eng_busy[e]) @(negedge clk);
endtask

task automatic load_layer(input int e, input int wbase);
  eng_cmd_t c = '0;
  c.op = OP_LOAD_W; c.w_base = ENG_WAW'(wbase);
  command(e, c);
endtask

task automatic run_layer(input int e, input int a, input int o, input int n,
                         input bit fin, input int sh, input int ibase);
  eng_cmd_t c = '0;
  c.op = OP_RUN; c.a_base = ENG_AW'(a); c.o_base = ENG_AW'(o); c.count = (ENG_AW+1)'(n);
  c.final_layer = fin; c.shift = 5'(sh); c.item_base = item_t'(ibase);
  command(e, c);
endtask

task automatic lookup(input int id, input stage_e st, input int e, input int addr);
  emb_port.get(1);
  @(negedge clk);
  emb_req_valid = 1;
  emb_req = '{id: emb_id_t'(id), stage: st, prefetch: 1'b0,
              dst_eng: ENG_IDX_W'(e), dst_addr: ENG_AW'(addr)};
  @(posedge clk);
  while (!emb_req_ready) @(posedge clk);
  @(negedge clk);
  emb_req_valid = 0;
  emb_port.put(1);
endtask

task automatic wait_gather_idle();
  repeat (3) @(negedge clk);
  while (!emb_req_ready || dram_req_valid) @(negedge clk);
  repeat (3) @(negedge clk);
endtask

// drained ids, per engine, collected at the clock edge
int drained [NE][$];
always @(posedge clk) if (rst_n && topn_valid && topn_ready) begin
  drained[topn_eng].push_back(int'(topn_item));
  if (fwd_en[topn_eng]) cnt_fwd++;
end

task automatic drain(input int e, input int k);
  @(negedge clk);
  tk_k[e] = (ITEM_W+1)'(k); tk_drain[e] = 1;
  @(negedge clk);
  tk_drain[e] = 0;
  while (!tk_done[e]) @(negedge clk);
  repeat (2) @(negedge clk);
endtask

task automatic clear_topk(input int e);
  @(negedge clk); tk_clear[e] = 1; @(negedge clk); tk_clear[e] = 0;
endtask

task automatic check_set(input string what, input int e, ref bit exp [int]);
  checks++;
  if (drained[e].size() != exp.size()) begin
    failures++; $display("%s: %0d ids, expected %0d", what, drained[e].size(), exp.size());
  end
  foreach (drained[e][i]) begin
    checks++;
    if (!exp.exists(drained[e][i])) begin failures++; $display("%s: unexpected id %0d", what, drained[e][i]); end
  end
endtask

function automatic line_t row_bytes(input data_t v [], input int n);
  line_t l = '0;
  for (int i = 0; i < n; i++) l[i*8 +: 8] = v[i];
  return l;
endfunction

task automatic set_config(input int md);
  for (int t = 0; t < NE; t++) begin join_left[t] = 0; join_up[t] = 0; end
  if (md == 0) begin
    for (int t = 0; t < NE; t++) begin
      join_left[t] = (t % NT) != 0;
      join_up[t]   = t >= NT;
    end
  end else begin
    join_up[NT + 1] = 1;     // tiles (0,1) and (1,1): backend sub-array
  end
  repeat (2) @(negedge clk);
endtask

// ------------------------------------------------------------ phases
task automatic phase_monolithic();
  int ids [$], ctrs [$];
  bit exp [int];
  data_t col [];
  set_config(0);
  // one-layer model: weights in column 0 only
  for (int r = 0; r < NT*N; r++) begin
    line_t l = '0;
    WM[r] = data_t'(int'($urandom % 5) - 2);
    l[7:0] = WM[r];
    write_w(0, r, l);
  end
  for (int m = 0; m < SB; m++) begin
    line_t x = tb_pkg::dram_line(emb_id_t'(5000 + m));
    longint s = 0;
    for (int r = 0; r < NT*N; r++) s += longint'(WM[r]) * longint'(lbyte(x, r));
    ids.push_back(700 + m); ctrs.push_back(sig_ref(s));
    write_act(0, m, x);
  end
  clear_topk(0);
  load_layer(0, 0);
  run_layer(0, 0, 0, SB, 1, 0, 700);
  drained[0].delete();
  drain(0, SB / 4);
  topk_ref(ids, ctrs, SB / 4, exp);
  check_set("monolithic", 0, exp);
  cnt_mode_switch++;
endtask

int fe_done_sb = -1;          // last frontend sub-batch drained
int surv [4][$];              // survivors of each sub-batch
int be_ids [$], be_ctrs [$];  // backend arrivals, in order
int be_pos_item [int];        // backend position -> item

task automatic fe_thread();
  // gather the whole query first, so the sub-batches then compute back to
  // back while the backend works on the previous one
  for (int i = 0; i < Q; i++) lookup(i, STAGE_FE, 0, i);
  wait_gather_idle();
  for (int s = 0; s < 4; s++) begin
    int ids [$], ctrs [$];
    bit exp [int];
    clear_topk(0);
    load_layer(0, 0);
    run_layer(0, s*SB, 512, SB, 0, SH1, 0);
    load_layer(0, N);
    run_layer(0, 512, 0, SB, 1, 0, s*SB);
    for (int m = 0; m < SB; m++) begin
      ids.push_back(s*SB + m); ctrs.push_back(fe_ctr(s*SB + m));
      if (ctrs[m] < 128) cnt_skip++;
    end
    drained[0].delete();
    drain(0, KF);       // survivors go to the gather unit as backend prefetches
    wait_gather_idle();
    topk_ref(ids, ctrs, KF, exp);
    check_set($sformatf("frontend sub-batch %0d", s), 0, exp);
    surv[s] = drained[0];
    fe_done_sb = s;
  end
endtask

task automatic be_thread();
  int pos = 0;
  for (int s = 0; s < 4; s++) begin
    int base = pos;
    while (fe_done_sb < s) @(negedge clk);
    foreach (surv[s][i]) begin
      lookup(BE_BASE + surv[s][i], STAGE_BE, 1, pos);
      be_pos_item[pos] = surv[s][i];
      be_ids.push_back(pos); be_ctrs.push_back(be_ctr(surv[s][i]));
      pos++;
    end
    wait_gather_idle();
    if (pos > base) begin
      load_layer(1, 0);
      run_layer(1, base, 1024 + base, pos - base, 0, SH1, 0);
      load_layer(1, 2*N);
      run_layer(1, 1024 + base, 0, pos - base, 1, 0, base);
    end
  end
endtask

task automatic fe2_query();
  // a second, independent frontend query on engine NT (host-written inputs)
  int ids [$], ctrs [$];
  bit exp [int];
  for (int m = 0; m < SB; m++) write_act(NT, m, tb_pkg::dram_line(emb_id_t'(9000 + m)));
  clear_topk(NT);
  while (!eng_busy[0]) @(negedge clk);   // start while the first query computes
  load_layer(NT, 0);
  run_layer(NT, 0, 256, SB, 0, SH1, 0);
  load_layer(NT, N);
  run_layer(NT, 256, 0, SB, 1, 0, 9000);
  for (int m = 0; m < SB; m++) begin ids.push_back(9000 + m); ctrs.push_back(fe_ctr(9000 + m)); end
  drained[NT].delete();
  drain(NT, KF);
  topk_ref(ids, ctrs, KF, exp);
  check_set("second frontend query", NT, exp);
endtask

task automatic phase_multistage();
  bit exp [int];
  set_config(1);
  // weights: frontend layer 1 rows at 0.., final layer column 0 at N..
  for (int r = 0; r < N; r++) for (int j = 0; j < N; j++) WF1[r][j] = data_t'(int'($urandom % 7) - 3);
  // final frontend layer: alternating signs put the scores on both sides
  // of the 0.5 threshold
  for (int j = 0; j < N; j++) WF2[j] = data_t'((j % 2 == 0) ? int'($urandom % 3) : -int'($urandom % 4));
  for (int r = 0; r < 2*N; r++) for (int j = 0; j < N; j++) WB1[r][j] = data_t'(int'($urandom % 7) - 3);
  for (int j = 0; j < N; j++) WB2[j] = data_t'(int'($urandom % 5) - 2);
  foreach (WF1[r]) begin
    data_t v [] = new[N];
    for (int j = 0; j < N; j++) v[j] = WF1[r][j];
    write_w(0, r, row_bytes(v, N)); write_w(NT, r, row_bytes(v, N));
  end
  for (int r = 0; r < N; r++) begin
    line_t l = '0; l[7:0] = WF2[r];
    write_w(0, N + r, l); write_w(NT, N + r, l);
  end
  for (int r = 0; r < 2*N; r++) begin
    data_t v [] = new[N];
    line_t l = '0;
    for (int j = 0; j < N; j++) v[j] = WB1[r][j];
    write_w(1, r, row_bytes(v, N));
    if (r < N) l[7:0] = WB2[r];
    write_w(1, 2*N + r, l);       // final layer: rows N..2N-1 are zero
  end
  // hot lines: every fourth frontend item and a few backend lines
  for (int i = 0; i < Q; i += 4) begin
    @(negedge clk);
    fill_en = 1; fill_stage = STAGE_FE; fill_id = emb_id_t'(i); fill_data = tb_pkg::dram_line(emb_id_t'(i));
  end
  for (int i = 1; i < Q; i += 8) begin
    @(negedge clk);
    fill_en = 1; fill_stage = STAGE_BE; fill_id = emb_id_t'(BE_BASE + i);
    fill_data = tb_pkg::dram_line(emb_id_t'(BE_BASE + i));
  end
  @(negedge clk); fill_en = 0;
  // forwarding: engine 0 survivors -> backend prefetches
  fwd_en[0] = 1; fwd_dst_eng = 1; fwd_emb_base = BE_BASE; fwd_prefetch = 1;
  fwd_clear = 1; @(negedge clk); fwd_clear = 0;
  clear_topk(1);
  fork
    fe_thread();
    be_thread();
    fe2_query();
  join
  fwd_en[0] = 0;
  // final ranking of the query
  drained[1].delete();
  drain(1, KB);
  topk_ref(be_ids, be_ctrs, KB, exp);
  check_set("backend", 1, exp);
  begin
    int n = 0;
    foreach (drained[1][i]) if (be_pos_item.exists(drained[1][i])) n++;
    checks++; if (n != drained[1].size()) failures++;
    $display("query of %0d items: %0d survived the frontend, %0d served", Q, be_ids.size(), n);
  end
  cnt_static_hit = n_static_hit; cnt_la_hit = n_la_hit; cnt_miss = n_miss; cnt_prefetch = n_prefetch;
  cnt_mode_switch++;
endtask

task automatic require(input string what, input int n);
  checks++;
  $display("  %-34s %0d", what, n);
  if (n == 0) begin failures++; $display("  mechanism never exercised: %s", what); end
endtask

task automatic run_flow();
  for (int t = 0; t < NE; t++) begin
    join_left[t] = 0; join_up[t] = 0; eng_cmd_valid[t] = 0; eng_cmd[t] = '0;
    tk_clear[t] = 0; tk_k[t] = 0; tk_drain[t] = 0; fwd_en[t] = 0;
  end
  w_wr_en = 0; w_wr_eng = 0; w_wr_addr = 0; w_wr_data = '0;
  h_act_wr_en = 0; h_act_wr_eng = 0; h_act_wr_addr = 0; h_act_wr_data = '0;
  h_act_rd_en = 0; h_act_rd_eng = 0; h_act_rd_addr = 0;
  emb_req_valid = 0; emb_req = '0;
  fill_en = 0; fill_stage = STAGE_FE; fill_id = 0; fill_data = '0;
  fwd_dst_eng = 0; fwd_emb_base = 0; fwd_prefetch = 0; fwd_clear = 0;
  repeat (3) @(negedge clk);
  rst_n = 1;
  repeat (2) @(negedge clk);
  phase_monolithic();
  phase_multistage();
  $display("mechanisms:");
  require("mode switches (array fission)", cnt_mode_switch - 1);
  require("static-cache hits", cnt_static_hit);
  require("look-ahead hits", cnt_la_hit);
  require("DRAM misses", cnt_miss);
  require("backend prefetches", cnt_prefetch);
  require("ids forwarded to the backend", cnt_fwd);
  require("scores under the CTR threshold", cnt_skip);
  require("frontend/backend overlap cycles", cnt_overlap);
  require("concurrent frontend-query cycles", cnt_concurrent);
  require("drain back-pressure cycles", cnt_backpressure);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask
