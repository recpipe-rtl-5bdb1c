// tb_lookahead_emb_cache: a 16-line look-ahead cache. Nothing hits after
// reset; a filled line hits with its data one cycle later; an id sharing
// the line's index but not its tag misses; a later fill to the same index
// replaces the earlier vector. Random fills and lookups are compared with
// a reference kept here.
module tb_lookahead_emb_cache;
  import rp_pkg::*;
  localparam int LINES = 16;
  logic clk = 0, rst_n = 0;
  logic fill_en, lk_en, lk_hit;
  emb_id_t fill_id, lk_id;
  line_t fill_data, lk_data;
  int checks = 0, failures = 0;

  lookahead_emb_cache #(.LINES(LINES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  emb_id_t r_id [int];
  line_t   r_dt [int];

  function automatic line_t mk(input int a);
    line_t l;
    for (int w = 0; w < LINE_W/32; w++) l[w*32 +: 32] = 32'(a * 31 + w * 5);
    return l;
  endfunction

  task automatic fill(input int id);
    @(negedge clk);
    fill_en = 1; fill_id = emb_id_t'(id); fill_data = mk(id);
    @(negedge clk);
    fill_en = 0;
    r_id[id % LINES] = emb_id_t'(id);
    r_dt[id % LINES] = mk(id);
  endtask

  task automatic look(input int id);
    bit exp_hit = r_id.exists(id % LINES) && r_id[id % LINES] == emb_id_t'(id);
    @(negedge clk);
    lk_en = 1; lk_id = emb_id_t'(id);
    @(negedge clk);
    lk_en = 0;
    checks++; if (lk_hit !== exp_hit) failures++;
    if (exp_hit) begin checks++; if (lk_data !== r_dt[id % LINES]) failures++; end
  endtask

  initial begin
    fill_en = 0; lk_en = 0; fill_id = 0; lk_id = 0; fill_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) look(i);
    fill(5); look(5); look(5 + LINES);
    fill(5 + LINES); look(5); look(5 + LINES);
    for (int i = 0; i < 300; i++) begin
      if ($urandom % 3 == 0) fill($urandom % 64);
      else look($urandom % 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
