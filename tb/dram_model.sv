// dram_model: behavioural DRAM for the testbenches. It accepts one line
// read at a time (req_ready low while busy) and returns the line LAT
// cycles later (100 cycles by default, the DRAM latency the accelerator
// was evaluated with). Contents are generated by tb_pkg::dram_line.
module dram_model
  import rp_pkg::*;
#(
  parameter int LAT = 100
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    req_valid,
  output logic    req_ready,
  input  emb_id_t req_addr,
  output logic    rsp_valid,
  output line_t   rsp_data,
  output int      n_reads
);
  int      cnt;
  logic    busy;
  emb_id_t a_q;
  assign req_ready = !busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; cnt <= 0; rsp_valid <= 0; rsp_data <= '0; a_q <= '0; n_reads <= 0;
    end else begin
      rsp_valid <= 0;
      if (!busy && req_valid) begin
        busy <= 1; cnt <= LAT - 1; a_q <= req_addr; n_reads <= n_reads + 1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 0; rsp_valid <= 1; rsp_data <= tb_pkg::dram_line(a_q);
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
