// tb_sa_tile: loads a random weight matrix into an 8x8 tile by shifting,
// streams skewed random activation vectors through it and compares every
// bottom output with a matrix product computed here. Checks the timing:
// column c of item m appears R+c cycles after row 0 of item m entered.
module tb_sa_tile;
  import rp_pkg::*;
  localparam int N = 8;
  localparam int M = 20;
  logic clk = 0, rst_n = 0;
  logic  w_load;
  data_t w_in [N], w_out [N], a_in [N], a_out [N];
  acc_t  p_in [N], p_out [N];
  int checks = 0, failures = 0;
  data_t W [N][N];
  data_t X [M][N];
  acc_t  Y [M][N];

  sa_tile #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[r][c] = data_t'($urandom);
    for (int m = 0; m < M; m++) for (int r = 0; r < N; r++) X[m][r] = data_t'($urandom);
    for (int m = 0; m < M; m++) for (int c = 0; c < N; c++) begin
      Y[m][c] = 0;
      for (int r = 0; r < N; r++) Y[m][c] += acc_t'(W[r][c]) * acc_t'(X[m][r]);
    end
    w_load = 0;
    for (int k = 0; k < N; k++) begin w_in[k] = 0; a_in[k] = 0; p_in[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weight load: last row first
    for (int s = 0; s < N; s++) begin
      @(negedge clk);
      w_load = 1;
      for (int c = 0; c < N; c++) w_in[c] = W[N-1-s][c];
    end
    @(negedge clk); w_load = 0;
    for (int c = 0; c < N; c++) begin
      checks++; if (w_out[c] !== W[N-1][c]) failures++;
    end
    // stream: during cycle s row r carries item s-r; column c shows item s-N-c
    for (int s = 0; s < M + 2*N + 2; s++) begin
      for (int r = 0; r < N; r++) a_in[r] = (s-r >= 0 && s-r < M) ? X[s-r][r] : data_t'(0);
      #1;
      for (int c = 0; c < N; c++) begin
        automatic int m = s - N - c;
        if (m >= 0 && m < M) begin
          checks++;
          if (p_out[c] !== Y[m][c]) begin
            failures++;
            if (failures < 10) $display("item %0d col %0d: %0d exp %0d", m, c, p_out[c], Y[m][c]);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
