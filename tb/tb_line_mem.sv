// tb_line_mem: behavioural model of the tag controller and DRAM behind the
// last-level cache (testbench only). It stores whole 64-byte tagged lines in
// a sparse array that reads as zero where never written, accepts one request
// at a time and answers every request after LAT cycles: reads with the line,
// writes with an acknowledge.
module tb_line_mem
  import poisoncap_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  line_req_t req,
  output logic      resp_valid,
  output cline_t    resp_data,
  output int        n_reads,
  output int        n_writes
);
  cline_t mem [logic [57:0]];
  logic busy;
  int   cnt;
  line_req_t r;

  assign req_ready = !busy;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; cnt <= 0; resp_valid <= 0; resp_data <= '0; n_reads <= 0; n_writes <= 0;
    end else begin
      resp_valid <= 0;
      if (!busy && req_valid) begin
        busy <= 1; cnt <= LAT; r <= req;
      end else if (busy) begin
        if (cnt > 1) cnt <= cnt - 1;
        else begin
          busy <= 0;
          resp_valid <= 1;
          if (r.we) begin
            mem[r.addr[63:6]] = r.data;
            n_writes <= n_writes + 1;
            resp_data <= '0;
          end else begin
            resp_data <= mem.exists(r.addr[63:6]) ? mem[r.addr[63:6]] : '0;
            n_reads <= n_reads + 1;
          end
        end
      end
    end
  end
endmodule
