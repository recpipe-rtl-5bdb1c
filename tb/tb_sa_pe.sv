// tb_sa_pe: checks the multiply-accumulate cell with random operands:
// p_out = p_in + w*a one cycle later, a_out = a_in one cycle later, and the
// weight register loads only while w_load is high.
module tb_sa_pe;
  import rp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic w_load;
  data_t w_in, w_out, a_in, a_out;
  acc_t p_in, p_out;
  int checks = 0, failures = 0;

  sa_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t w_ref;
    w_load = 0; w_in = 0; a_in = 0; p_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    w_ref = 0;
    for (int i = 0; i < 500; i++) begin
      data_t a; acc_t p; logic ld; data_t wn;
      a  = data_t'($urandom); p = acc_t'($urandom);
      ld = ($urandom % 4) == 0; wn = data_t'($urandom);
      @(negedge clk);
      w_load = ld; w_in = wn; a_in = a; p_in = p;
      @(posedge clk); #1;
      // the product uses the weight held before this edge
      checks++; if (p_out !== p + acc_t'(w_ref) * acc_t'(a)) begin
        failures++; $display("p_out %0d exp %0d", p_out, p + acc_t'(w_ref) * acc_t'(a));
      end
      checks++; if (a_out !== a) failures++;
      if (ld) w_ref = wn;
      checks++; if (w_out !== w_ref) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
