// tb_reconfig_sa: a 2x2-tile array of 4x4 tiles (8x8 MACs) is run in four
// fission modes, one after the other without reset:
//   0: four independent 4x4 sub-arrays,
//   1: one fused 8x8 array,
//   2: a 4x8 array on top (joined left) and two 4x4 arrays below,
//   3: an 8x4 array on the left (joined up) and two 4x4 arrays on the right.
// In each mode every sub-array is loaded with its own random weights and
// fed its own skewed random inputs at the same time; every bottom output
// is compared with a matrix product computed here, which also checks that
// sub-arrays do not disturb each other.
module tb_reconfig_sa;
  import rp_pkg::*;
  localparam int NT = 2, N = 4, NE = NT*NT, M = 12;
  logic clk = 0, rst_n = 0;
  logic  join_left [NE], join_up [NE], w_load [NE];
  data_t w_ext [NE][N], a_ext [NE][N];
  acc_t  p_out [NE][N];
  int checks = 0, failures = 0;
  int modes_run = 0;

  reconfig_sa #(.NT(NT), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int    own [NE];            // owner tile of every tile
  int    hh [NE], ww [NE];    // sub-array size in MACs (owner tiles only)
  data_t W [NE][NT*N][NT*N];
  data_t X [NE][M][NT*N];

  task automatic set_mode(input int md);
    for (int t = 0; t < NE; t++) begin join_left[t] = 0; join_up[t] = 0; end
    case (md)
      1: begin join_left[1] = 1; join_up[2] = 1; join_left[3] = 1; join_up[3] = 1; end
      2: begin join_left[1] = 1; end
      3: begin join_up[2] = 1; end
      default: ;
    endcase
    // reference ownership, worked out from the mode table above
    case (md)
      0: own = '{0, 1, 2, 3};
      1: own = '{0, 0, 0, 0};
      2: own = '{0, 0, 2, 3};
      default: own = '{0, 1, 0, 3};
    endcase
    for (int e = 0; e < NE; e++) begin
      hh[e] = 0; ww[e] = 0;
      if (own[e] == e) begin
        for (int i = e/NT; i < NT; i++) if (own[i*NT + e%NT] == e) hh[e] += N;
        for (int j = e%NT; j < NT; j++) if (own[(e/NT)*NT + j] == e) ww[e] += N;
      end
    end
  endtask

  task automatic run_mode(input int md);
    int maxh = 0;
    set_mode(md);
    for (int e = 0; e < NE; e++) begin
      for (int r = 0; r < NT*N; r++) for (int c = 0; c < NT*N; c++) W[e][r][c] = data_t'($urandom);
      for (int m = 0; m < M; m++) for (int r = 0; r < NT*N; r++) X[e][m][r] = data_t'($urandom);
      if (hh[e] > maxh) maxh = hh[e];
    end
    // weight load: every sub-array shifts its rows in, last row first
    for (int s = 0; s < maxh; s++) begin
      @(negedge clk);
      for (int t = 0; t < NE; t++) begin
        automatic int e = own[t];
        w_load[t] = (s < hh[e]);
        for (int k = 0; k < N; k++)
          w_ext[t][k] = (s < hh[e]) ? W[e][hh[e]-1-s][(t%NT - e%NT)*N + k] : data_t'(0);
      end
    end
    @(negedge clk);
    for (int t = 0; t < NE; t++) w_load[t] = 0;
    // stream
    for (int s = 0; s < M + 4*NT*N; s++) begin
      for (int t = 0; t < NE; t++) begin
        automatic int e = own[t];
        for (int k = 0; k < N; k++) begin
          automatic int r = (t/NT - e/NT)*N + k;
          a_ext[t][k] = (s-r >= 0 && s-r < M) ? X[e][s-r][r] : data_t'(0);
        end
      end
      #1;
      for (int t = 0; t < NE; t++) begin
        automatic int e = own[t];
        automatic bit bot = (t/NT - e/NT)*N + N == hh[e];
        if (bot) for (int k = 0; k < N; k++) begin
          automatic int c = (t%NT - e%NT)*N + k;
          automatic int m = s - hh[e] - c;
          if (m >= 0 && m < M) begin
            automatic acc_t y = 0;
            for (int r = 0; r < hh[e]; r++) y += acc_t'(W[e][r][c]) * acc_t'(X[e][m][r]);
            checks++;
            if (p_out[t][k] !== y) begin
              failures++;
              if (failures < 10) $display("mode %0d tile %0d col %0d item %0d: %0d exp %0d",
                                          md, t, c, m, p_out[t][k], y);
            end
          end
        end
      end
      @(negedge clk);
    end
    modes_run++;
  endtask

  initial begin
    for (int t = 0; t < NE; t++) begin
      join_left[t] = 0; join_up[t] = 0; w_load[t] = 0;
      for (int k = 0; k < N; k++) begin w_ext[t][k] = 0; a_ext[t][k] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int md = 0; md < 4; md++) run_mode(md);
    checks++; if (modes_run != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
