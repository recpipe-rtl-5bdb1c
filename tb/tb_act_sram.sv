// tb_act_sram: an 8-lane, 32-word activation bank. Checks whole-line
// writes read back lane by lane, per-lane writes at a different address in
// every lane in the same cycle (as the engine does when it de-skews), a
// per-lane write and a line write to different words in the same cycle,
// and skewed reads (lane r reads word m-r) with their one-cycle latency.
module tb_act_sram;
  import rp_pkg::*;
  localparam int LN = 8, D = 32;
  logic clk = 0;
  logic rd_en [LN], wr_en [LN];
  logic [4:0] rd_addr [LN], wr_addr [LN];
  data_t rd_data [LN], wr_data [LN];
  logic line_wr_en;
  logic [4:0] line_wr_addr;
  logic [LN*8-1:0] line_wr_data;
  data_t ref_m [D][LN];
  int checks = 0, failures = 0;

  act_sram #(.LANES(LN), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      for (int l = 0; l < LN; l++) begin rd_en[l] = 1; rd_addr[l] = 5'(a); end
      @(negedge clk);
      for (int l = 0; l < LN; l++) begin
        rd_en[l] = 0;
        checks++; if (rd_data[l] !== ref_m[a][l]) failures++;
      end
    end
  endtask

  initial begin
    line_wr_en = 0; line_wr_addr = 0; line_wr_data = 0;
    for (int l = 0; l < LN; l++) begin rd_en[l] = 0; wr_en[l] = 0; rd_addr[l] = 0; wr_addr[l] = 0; wr_data[l] = 0; end
    // whole-line writes
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      line_wr_en = 1; line_wr_addr = 5'(a);
      for (int l = 0; l < LN; l++) begin
        ref_m[a][l] = data_t'($urandom);
        line_wr_data[l*8 +: 8] = ref_m[a][l];
      end
    end
    @(negedge clk); line_wr_en = 0;
    read_all();
    // skewed per-lane writes: lane l writes word s-l, with a line write
    // into word 31 in the same cycles
    for (int s = 0; s < 20; s++) begin
      @(negedge clk);
      for (int l = 0; l < LN; l++) begin
        automatic int a = s - l;
        wr_en[l] = (a >= 0 && a < 16);
        wr_addr[l] = 5'(a);
        wr_data[l] = data_t'($urandom);
        if (wr_en[l]) ref_m[a][l] = wr_data[l];
      end
      line_wr_en = 1; line_wr_addr = 5'd31;
      for (int l = 0; l < LN; l++) begin
        ref_m[31][l] = data_t'(s + l);
        line_wr_data[l*8 +: 8] = ref_m[31][l];
      end
    end
    @(negedge clk);
    line_wr_en = 0;
    for (int l = 0; l < LN; l++) wr_en[l] = 0;
    read_all();
    // skewed read: lane l reads word s-l
    for (int s = 0; s < 24; s++) begin
      @(negedge clk);
      for (int l = 0; l < LN; l++) begin
        rd_en[l] = (s - l >= 0 && s - l < D);
        rd_addr[l] = 5'(s - l);
      end
      @(posedge clk); #1;
      for (int l = 0; l < LN; l++)
        if (s - l >= 0 && s - l < D) begin
          checks++; if (rd_data[l] !== ref_m[s-l][l]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
