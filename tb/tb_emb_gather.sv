// tb_emb_gather: the gather unit with small caches (16 static lines split
// 8/8, 8 look-ahead lines) and the 100-cycle DRAM model. A scripted
// sequence exercises each path: static hit, miss filled from DRAM,
// look-ahead hit on the refetch, prefetch (DRAM read, no output), the
// later demand hit on the prefetched line, the frontend/backend partition
// (a backend-only hot line misses for a frontend lookup) and eviction of a
// look-ahead line. Checked: the vector, its destination engine and word,
// the hit/miss counters, DRAM reads, and the latency (2 cycles for a hit,
// 2 + the DRAM round trip for a miss).
module tb_emb_gather;
  import rp_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready;
  emb_req_t req;
  logic fill_en;
  stage_e fill_stage;
  emb_id_t fill_id;
  line_t fill_data;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  emb_id_t dram_req_addr;
  line_t dram_rsp_data;
  logic out_valid;
  logic [ENG_IDX_W-1:0] out_eng;
  logic [ENG_AW-1:0] out_addr;
  line_t out_data;
  logic [31:0] n_static_hit, n_la_hit, n_miss, n_prefetch;
  int n_reads;
  int checks = 0, failures = 0;

  emb_gather #(.STATIC_LINES(16), .FE_LINES(8), .LA_LINES(8)) dut (.*);
  dram_model #(.LAT(100)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_addr(dram_req_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .n_reads(n_reads)
  );
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t hot(input int id);
    line_t l;
    for (int w = 0; w < LINE_W/32; w++) l[w*32 +: 32] = 32'(id * 1000 + w);
    return l;
  endfunction

  task automatic preload(input stage_e s, input int id);
    @(negedge clk);
    fill_en = 1; fill_stage = s; fill_id = emb_id_t'(id); fill_data = hot(id);
    @(negedge clk);
    fill_en = 0;
  endtask

  // issue one lookup; expect output 'exp' (unless prefetch) within max_lat
  task automatic lookup(input int id, input stage_e s, input bit pf, input line_t exp,
                        input int min_lat, input int max_lat);
    int lat = 0;
    logic [ENG_IDX_W-1:0] e = ENG_IDX_W'($urandom);
    logic [ENG_AW-1:0]    a = ENG_AW'($urandom);
    @(negedge clk);
    req_valid = 1;
    req = '{id: emb_id_t'(id), stage: s, prefetch: pf, dst_eng: e, dst_addr: a};
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!req_ready || (out_valid == 0 && !pf && lat < max_lat + 5)) begin
      if (out_valid) break;
      @(negedge clk);
      lat++;
    end
    if (!pf) begin
      checks++; if (!out_valid) begin failures++; $display("id %0d: no output", id); end
      checks++; if (out_data !== exp || out_eng !== e || out_addr !== a) failures++;
      checks++; if (lat < min_lat || lat > max_lat) begin failures++; $display("id %0d latency %0d", id, lat); end
    end else begin
      checks++; if (out_valid) failures++;
    end
  endtask

  initial begin
    req_valid = 0; req = '0; fill_en = 0; fill_stage = STAGE_FE; fill_id = 0; fill_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    preload(STAGE_FE, 3);
    preload(STAGE_BE, 100);
    lookup(3,   STAGE_FE, 0, hot(3),         2, 2);     // static hit
    lookup(50,  STAGE_FE, 0, dram_line(50),  100, 106); // miss
    lookup(50,  STAGE_FE, 0, dram_line(50),  2, 2);     // look-ahead hit
    lookup(200, STAGE_BE, 1, '0,             0, 0);     // prefetch
    repeat (110) @(negedge clk);
    lookup(200, STAGE_BE, 0, dram_line(200), 2, 2);     // prefetched line hits
    lookup(100, STAGE_BE, 0, hot(100),       2, 2);     // backend hot line
    lookup(100, STAGE_FE, 0, dram_line(100), 100, 106); // not hot for the frontend
    lookup(58,  STAGE_FE, 0, dram_line(58),  100, 106); // evicts 50 (same index)
    lookup(50,  STAGE_FE, 0, dram_line(50),  100, 106); // so 50 misses again
    repeat (3) @(negedge clk);
    checks++; if (n_static_hit != 2) failures++;
    checks++; if (n_la_hit != 2) failures++;
    checks++; if (n_miss != 5) failures++;
    checks++; if (n_prefetch != 1) failures++;
    checks++; if (n_reads != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
