// tb_static_emb_cache: a 24-line static cache, 8 lines for the frontend
// and 16 for the backend. After reset nothing hits. Lines are preloaded
// for both stages; lookups must hit only for the stage a line was loaded
// for, return its data one cycle later, and miss for ids that map to the
// same line with a different tag or were overwritten by a later fill.
module tb_static_emb_cache;
  import rp_pkg::*;
  localparam int LINES = 24, FE = 8;
  logic clk = 0, rst_n = 0;
  logic fill_en, lk_en, lk_hit;
  stage_e fill_stage, lk_stage;
  emb_id_t fill_id, lk_id;
  line_t fill_data, lk_data;
  int checks = 0, failures = 0;

  static_emb_cache #(.LINES(LINES), .FE_LINES(FE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per stage, map from partition slot to (id, data)
  emb_id_t r_id [2][int];
  line_t   r_dt [2][int];

  function automatic line_t mk(input int a);
    line_t l;
    for (int w = 0; w < LINE_W/32; w++) l[w*32 +: 32] = 32'(a * 97 + w);
    return l;
  endfunction

  task automatic fill(input stage_e s, input int id);
    int slot = (s == STAGE_FE) ? id % FE : id % (LINES - FE);
    @(negedge clk);
    fill_en = 1; fill_stage = s; fill_id = emb_id_t'(id); fill_data = mk(id);
    @(negedge clk);
    fill_en = 0;
    r_id[s][slot] = emb_id_t'(id);
    r_dt[s][slot] = mk(id);
  endtask

  task automatic look(input stage_e s, input int id);
    int slot = (s == STAGE_FE) ? id % FE : id % (LINES - FE);
    bit exp_hit = r_id[s].exists(slot) && r_id[s][slot] == emb_id_t'(id);
    @(negedge clk);
    lk_en = 1; lk_stage = s; lk_id = emb_id_t'(id);
    @(negedge clk);
    lk_en = 0;
    checks++; if (lk_hit !== exp_hit) begin failures++; $display("stage %0d id %0d hit %0d exp %0d", s, id, lk_hit, exp_hit); end
    if (exp_hit) begin checks++; if (lk_data !== r_dt[s][slot]) failures++; end
  endtask

  initial begin
    fill_en = 0; lk_en = 0; fill_stage = STAGE_FE; lk_stage = STAGE_FE; fill_id = 0; lk_id = 0; fill_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) look(stage_e'(i % 2), i);   // cold: all miss
    for (int i = 0; i < 6; i++)  fill(STAGE_FE, 3 * i);
    for (int i = 0; i < 10; i++) fill(STAGE_BE, 5 * i + 1);
    for (int i = 0; i < 60; i++) begin look(STAGE_FE, i); look(STAGE_BE, i); end
    fill(STAGE_FE, 3 + FE);     // evicts id 3 from its frontend slot
    look(STAGE_FE, 3); look(STAGE_FE, 3 + FE);
    for (int i = 0; i < 200; i++) begin
      if ($urandom % 3 == 0) fill(stage_e'($urandom % 2), $urandom % 100);
      else look(stage_e'($urandom % 2), $urandom % 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
