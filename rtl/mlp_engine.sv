// mlp_engine: the controller and local memories of one sub-array of the
// reconfigurable systolic array. It runs one fully-connected layer at a
// time for a batch of items on the sub-array that it owns, and on the last
// layer of a model streams out one CTR score per cycle for the top-k
// filter. The paper describes the MLP unit as weight stationary, split
// into sub-arrays that each have their own top-k unit; the command set,
// memory organisation and arithmetic below are this design's.
//
// Commands (eng_cmd_t, accepted when cmd_ready):
//  * OP_LOAD_W: shifts rows w_base+H-1 .. w_base of the weight bank down
//    into the H x W sub-array (H = sa_rows, W = sa_cols); takes H+1 cycles.
//    Weight row r holds the weights of input feature r, byte c of the row
//    the weight to output c.
//  * OP_RUN: streams 'count' items from activation words a_base.. through
//    the array. Lane r of item m is read in cycle m+r, which applies the
//    systolic skew; output column c of item m leaves the bottom of the
//    sub-array in cycle m+H+c+1 and is written to lane o_lane+c of word
//    o_base+m, which removes it. A layer over count items therefore takes
//    count+H+W cycles. Per output:
//      v = sum (+ stored partial sum if acc_in)
//      acc_out      : v is kept in the 32-bit partial-sum memory (used when a
//                     layer has more than H inputs and is run in slices)
//      final_layer  : column 0 only, ctr = sigmoid(v >>> shift) -> ctr_*
//      otherwise    : relu, >>> shift, saturate to int8 -> activation bank
//    Layers wider than W outputs are run as several RUN commands with
//    different weights and o_lane.
// Host side: a weight-bank write port, a whole-line activation write port
// (also used by the embedding gather unit) and a whole-line activation read
// port (synchronous, only while idle).
module mlp_engine
  import rp_pkg::*;
#(
  parameter int unsigned LANES     = ARRAY_N,
  parameter int unsigned WDEPTH    = ENG_WDEPTH,
  parameter int unsigned ADEPTH    = ENG_ADEPTH,
  parameter int unsigned ACC_DEPTH = ENG_ACC_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // shape of the sub-array this engine owns (rows and columns of MACs)
  input  logic [LANE_W:0] sa_rows,
  input  logic [LANE_W:0] sa_cols,
  // command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  eng_cmd_t    cmd,
  output logic        busy,
  // array side
  output logic        w_load,
  output data_t       w_row [LANES],
  output data_t       a_row [LANES],
  input  acc_t        p_row [LANES],
  // CTR stream of the final layer
  output logic        ctr_valid,
  output item_t       ctr_item,
  output ctr_t        ctr_value,
  // weight bank write port
  input  logic                  w_wr_en,
  input  logic [ENG_WAW-1:0]    w_wr_addr,
  input  line_t                 w_wr_data,
  // activation bank line write port
  input  logic                  a_wr_en,
  input  logic [ENG_AW-1:0]     a_wr_addr,
  input  line_t                 a_wr_data,
  // activation bank line read port (idle only)
  input  logic                  a_rd_en,
  input  logic [ENG_AW-1:0]     a_rd_addr,
  output line_t                 a_rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_e;
  state_e   state;
  eng_cmd_t c_q;
  logic [15:0] t;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // ------------------------------------------------------------------ banks
  line_t w_rd_data;
  logic  w_rd_en;
  logic [ENG_WAW-1:0] w_rd_addr;

  weight_sram #(.DEPTH(WDEPTH), .W(LINE_W)) u_wbank (
    .clk(clk), .wr_en(w_wr_en), .wr_addr(w_wr_addr[$clog2(WDEPTH)-1:0]),
    .wr_data(w_wr_data), .rd_en(w_rd_en), .rd_addr(w_rd_addr[$clog2(WDEPTH)-1:0]),
    .rd_data(w_rd_data)
  );

  logic                  l_rd_en   [LANES];
  logic [ENG_AW-1:0]     l_rd_addr [LANES];
  data_t                 l_rd_data [LANES];
  logic                  l_wr_en   [LANES];
  logic [ENG_AW-1:0]     l_wr_addr [LANES];
  data_t                 l_wr_data [LANES];

  act_sram #(.LANES(LANES), .DEPTH(ADEPTH), .AW(ENG_AW)) u_abank (
    .clk(clk),
    .rd_en(l_rd_en), .rd_addr(l_rd_addr), .rd_data(l_rd_data),
    .wr_en(l_wr_en), .wr_addr(l_wr_addr), .wr_data(l_wr_data),
    .line_wr_en(a_wr_en), .line_wr_addr(a_wr_addr),
    .line_wr_data(a_wr_data[LANES*DATA_W-1:0])
  );

  for (genvar l = 0; l < LANES; l++) begin : g_rd
    assign a_rd_data[l*DATA_W +: DATA_W] = l_rd_data[l];
  end
  if (LANES < LINE_BYTES) begin : g_pad
    assign a_rd_data[LINE_W-1:LANES*DATA_W] = '0;
  end

  // ------------------------------------------------------------ weight load
  always_comb begin
    w_rd_en   = (state == S_LOAD) && (t < 16'(sa_rows));
    w_rd_addr = c_q.w_base + ENG_WAW'(16'(sa_rows) - 16'd1 - t);
  end
  assign w_load = (state == S_LOAD) && (t >= 16'd1);
  for (genvar l = 0; l < LANES; l++) begin : g_wrow
    assign w_row[l] = w_rd_data[l*DATA_W +: DATA_W];
  end

  // ------------------------------------------------- skewed activation feed
  logic a_v_q [LANES];
  always_comb begin
    for (int r = 0; r < LANES; r++) begin
      automatic int m = int'(t) - r;
      l_rd_en[r]   = 1'b0;
      l_rd_addr[r] = a_rd_addr;
      if (state == S_RUN) begin
        l_rd_en[r]   = (r < int'(sa_rows)) && (m >= 0) && (m < int'(c_q.count));
        l_rd_addr[r] = c_q.a_base + ENG_AW'(m);
      end else if (state == S_IDLE) begin
        l_rd_en[r]   = a_rd_en;
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int r = 0; r < LANES; r++) a_v_q[r] <= 1'b0;
    else        for (int r = 0; r < LANES; r++) a_v_q[r] <= l_rd_en[r] && (state == S_RUN);
  end
  for (genvar r = 0; r < LANES; r++) begin : g_arow
    assign a_row[r] = a_v_q[r] ? l_rd_data[r] : '0;
  end

  // ------------------------------------------------ de-skewed result drain
  // column c shows item m = t - H - c - 1 in cycle t
  logic        o_v   [LANES];
  logic [15:0] o_m   [LANES];
  acc_t        o_val [LANES];
  acc_t        acc_rd [LANES];
  logic        acc_we [LANES];

  for (genvar c = 0; c < LANES; c++) begin : g_acc
    acc_t acc_mem [ACC_DEPTH];
    assign acc_rd[c] = acc_mem[o_m[c][$clog2(ACC_DEPTH)-1:0]];
    always_ff @(posedge clk)
      if (acc_we[c]) acc_mem[o_m[c][$clog2(ACC_DEPTH)-1:0]] <= o_val[c];
  end

  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      automatic int m = int'(t) - int'(sa_rows) - c - 1;
      o_v[c]    = (state == S_RUN) && (c < int'(sa_cols)) && (m >= 0) && (m < int'(c_q.count));
      o_m[c]    = 16'(m);
    end
  end

  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      o_val[c]  = p_row[c] + (c_q.acc_in ? acc_rd[c] : acc_t'(0));
      acc_we[c] = o_v[c] && c_q.acc_out;
    end
    // activation write-back, lane l takes column l - o_lane
    for (int l = 0; l < LANES; l++) begin
      automatic int   c = l - int'(c_q.o_lane);
      automatic acc_t q = '0;
      l_wr_en[l]   = 1'b0;
      l_wr_addr[l] = '0;
      l_wr_data[l] = '0;
      if (c >= 0 && c < LANES) begin
        q = o_val[c] >>> c_q.shift;
        l_wr_en[l]   = o_v[c] && !c_q.acc_out && !c_q.final_layer;
        l_wr_addr[l] = c_q.o_base + ENG_AW'(o_m[c]);
        if (q < 0)        l_wr_data[l] = '0;             // ReLU
        else if (q > 127) l_wr_data[l] = data_t'(127);   // saturate
        else              l_wr_data[l] = data_t'(q);
      end
    end
  end

  // final layer: column 0 -> sigmoid -> CTR stream (one score per cycle)
  ctr_t ctr_c;
  ctr_sigmoid u_sig (.sum(o_val[0]), .shift(c_q.shift), .ctr(ctr_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr_valid <= 1'b0;
      ctr_item  <= '0;
      ctr_value <= '0;
    end else begin
      ctr_valid <= o_v[0] && c_q.final_layer && !c_q.acc_out;
      ctr_item  <= c_q.item_base + item_t'(o_m[0]);
      ctr_value <= ctr_c;
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      c_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c_q   <= cmd;
          t     <= '0;
          state <= (cmd.op == OP_LOAD_W) ? S_LOAD : S_RUN;
        end
        S_LOAD: begin
          t <= t + 16'd1;
          if (t == 16'(sa_rows)) state <= S_IDLE;
        end
        S_RUN: begin
          t <= t + 16'd1;
          if (t == 16'(c_q.count) + 16'(sa_rows) + 16'(sa_cols) - 16'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_shape: assert property (@(posedge clk)
      (rst_n && cmd_valid && cmd_ready) |-> (sa_rows != 0 && sa_cols != 0))
    else $error("mlp_engine: command to an engine that owns no sub-array");
endmodule
