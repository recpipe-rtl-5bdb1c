// tb_mlp_engine: one engine driving one 8x8 tile (LANES = 8). Checks,
// against integer arithmetic done here:
//  * weight load takes H+1 cycles and a layer over M items M+H+W cycles;
//  * a hidden layer (ReLU, shift, saturation to int8) read back from the
//    activation bank;
//  * a layer split over its inputs: first half stored as 32-bit partial
//    sums (acc_out), second half added (acc_in), equal to the unsplit layer;
//  * output placement with o_lane (columns written from lane 4 upward);
//  * the final layer: one CTR per cycle, ids item_base.., the sigmoid
//    values.
module tb_mlp_engine;
  import rp_pkg::*;
  localparam int LN = 8, M = 12;
  logic clk = 0, rst_n = 0;
  logic [LANE_W:0] sa_rows, sa_cols;
  logic cmd_valid, cmd_ready, busy, w_load;
  eng_cmd_t cmd;
  data_t w_row [LN], a_row [LN], w_out [LN], a_out [LN];
  acc_t p_row [LN], p_zero [LN];
  logic ctr_valid;
  item_t ctr_item;
  ctr_t ctr_value;
  logic w_wr_en, a_wr_en, a_rd_en;
  logic [ENG_WAW-1:0] w_wr_addr;
  logic [ENG_AW-1:0] a_wr_addr, a_rd_addr;
  line_t w_wr_data, a_wr_data, a_rd_data;
  int checks = 0, failures = 0;

  mlp_engine #(.LANES(LN), .WDEPTH(64), .ADEPTH(64), .ACC_DEPTH(16)) dut (.*);
  sa_tile #(.N(LN)) u_arr (
    .clk(clk), .rst_n(rst_n), .w_load(w_load), .w_in(w_row), .w_out(w_out),
    .a_in(a_row), .a_out(a_out), .p_in(p_zero), .p_out(p_row)
  );
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t W1 [LN][LN], W2 [LN][LN], X [M][LN], Hid [M][LN];

  task automatic wr_w(input int base, input data_t Wm [LN][LN], input int r_lo, input int r_hi);
    for (int r = 0; r < LN; r++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_addr = ENG_WAW'(base + r); w_wr_data = '0;
      for (int c = 0; c < LN; c++)
        w_wr_data[c*8 +: 8] = (r >= r_lo && r <= r_hi) ? Wm[r][c] : data_t'(0);
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  task automatic issue(input eng_cmd_t c, input int exp_cycles);
    int n = 0;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) begin @(negedge clk); n++; end
    checks++; if (n != exp_cycles) begin failures++; $display("op %0d took %0d cycles, exp %0d", c.op, n, exp_cycles); end
  endtask

  function automatic data_t act(input acc_t v, input int sh);
    acc_t q = v >>> sh;
    return (q < 0) ? data_t'(0) : (q > 127) ? data_t'(127) : data_t'(q);
  endfunction

  function automatic int sig(input acc_t v, input int sh);
    real x = real'(v >>> sh) / 256.0;
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

  task automatic check_bank(input int base, input int lane_off, input int sh);
    for (int m = 0; m < M; m++) begin
      @(negedge clk); a_rd_en = 1; a_rd_addr = ENG_AW'(base + m);
      @(negedge clk); a_rd_en = 0;
      for (int l = lane_off; l < LN; l++) begin
        automatic acc_t y = 0;
        for (int r = 0; r < LN; r++) y += acc_t'(W1[r][l - lane_off]) * acc_t'(X[m][r]);
        checks++;
        if (data_t'(a_rd_data[l*8 +: 8]) !== act(y, sh)) begin
          failures++;
          if (failures < 8) $display("word %0d lane %0d: %0d exp %0d", base+m, l, data_t'(a_rd_data[l*8 +: 8]), act(y, sh));
        end
        if (lane_off == 0) Hid[m][l] = act(y, sh);
      end
    end
  endtask

  eng_cmd_t c;
  int nctr, last_t, gap_bad;
  always @(posedge clk) if (rst_n && ctr_valid) begin
    automatic int m = int'(ctr_item) - 500;
    automatic acc_t y = 0;
    for (int r = 0; r < LN; r++) y += acc_t'(W2[r][0]) * acc_t'(Hid[m][r]);
    checks++;
    if (m != nctr || int'(ctr_value) != sig(y, 4)) begin
      failures++;
      $display("ctr item %0d value %0d exp %0d (%0d)", m, ctr_value, sig(y, 4), nctr);
    end
    if (nctr > 0 && $time - last_t != 10) gap_bad++;
    last_t = $time;
    nctr++;
  end

  initial begin
    for (int k = 0; k < LN; k++) p_zero[k] = '0;
    sa_rows = LN; sa_cols = LN;
    cmd_valid = 0; cmd = '0; w_wr_en = 0; a_wr_en = 0; a_rd_en = 0;
    w_wr_addr = 0; a_wr_addr = 0; a_rd_addr = 0; w_wr_data = 0; a_wr_data = 0;
    nctr = 0; gap_bad = 0;
    for (int r = 0; r < LN; r++) for (int q = 0; q < LN; q++) begin
      W1[r][q] = data_t'(int'($urandom % 21) - 10);
      W2[r][q] = data_t'(int'($urandom % 21) - 10);
    end
    for (int m = 0; m < M; m++) for (int r = 0; r < LN; r++) X[m][r] = data_t'(int'($urandom % 41) - 20);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr_w(0, W1, 0, LN-1);      // full layer 1
    wr_w(8, W1, 0, 3);         // layer 1, inputs 0..3 only
    wr_w(16, W1, 4, LN-1);     // layer 1, inputs 4..7 only
    wr_w(24, W2, 0, LN-1);     // final layer
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      a_wr_en = 1; a_wr_addr = ENG_AW'(m); a_wr_data = '0;
      for (int r = 0; r < LN; r++) a_wr_data[r*8 +: 8] = X[m][r];
    end
    @(negedge clk); a_wr_en = 0;

    // hidden layer
    c = '0; c.op = OP_LOAD_W; c.w_base = 0;               issue(c, LN + 1);
    c = '0; c.op = OP_RUN; c.a_base = 0; c.o_base = 20; c.count = M; c.shift = 3;
    issue(c, M + 2*LN);
    check_bank(20, 0, 3);
    // same layer split over its inputs
    c = '0; c.op = OP_LOAD_W; c.w_base = 8;               issue(c, LN + 1);
    c = '0; c.op = OP_RUN; c.count = M; c.acc_out = 1;   issue(c, M + 2*LN);
    c = '0; c.op = OP_LOAD_W; c.w_base = 16;              issue(c, LN + 1);
    c = '0; c.op = OP_RUN; c.o_base = 40; c.count = M; c.acc_in = 1; c.shift = 3;
    issue(c, M + 2*LN);
    check_bank(40, 0, 3);
    // output columns placed from lane 4
    c = '0; c.op = OP_LOAD_W; c.w_base = 0;               issue(c, LN + 1);
    c = '0; c.op = OP_RUN; c.o_base = 52; c.count = M; c.o_lane = 4; c.shift = 3;
    issue(c, M + 2*LN);
    check_bank(52, 4, 3);
    // final layer on the hidden activations at word 20
    c = '0; c.op = OP_LOAD_W; c.w_base = 24;              issue(c, LN + 1);
    c = '0; c.op = OP_RUN; c.a_base = 20; c.count = M; c.final_layer = 1; c.shift = 4;
    c.item_base = 500;
    issue(c, M + 2*LN);
    repeat (3) @(negedge clk);
    checks++; if (nctr != M) begin failures++; $display("%0d CTRs", nctr); end
    checks++; if (gap_bad != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
