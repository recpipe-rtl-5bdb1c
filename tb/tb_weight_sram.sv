// tb_weight_sram: writes random words to random addresses of a 64-word
// bank, then reads every written address back and compares with a copy
// kept here; checks the one-cycle read latency and that a read while not
// enabled holds the previous output.
module tb_weight_sram;
  import rp_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  line_t wr_data, rd_data;
  line_t ref_m [int];
  int checks = 0, failures = 0;

  weight_sram #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 200; i++) begin
      line_t d;
      for (int w = 0; w < LINE_W/32; w++) d[w*32 +: 32] = $urandom;
      @(negedge clk);
      wr_en = 1; wr_addr = 6'($urandom); wr_data = d;
      ref_m[int'(wr_addr)] = d;
    end
    @(negedge clk); wr_en = 0;
    foreach (ref_m[a]) begin
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      checks++; if (rd_data !== ref_m[a]) failures++;
      rd_addr = rd_addr + 1;
      @(negedge clk);
      checks++; if (rd_data !== ref_m[a]) failures++;   // held while rd_en is low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
