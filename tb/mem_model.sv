// mem_model: behavioural main memory (DRAM) for the L2 and whole-subsystem
// testbenches. Always ready; one read at a time, answered LAT cycles after its
// handshake (the evaluated system uses 100 cycles, 50 ns at 2 GHz). Writes
// take effect at once. Unwritten lines read as star_tb_pkg::pattern(address).
module mem_model
  import star_pkg::*;
  import star_tb_pkg::*;
#(
  parameter int LAT = 100
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output line_t     resp_data,
  output int        n_read,
  output int        n_write,
  output mem_req_t  last_write
);
  line_t      store [line_addr_t];
  logic       busy;
  int         cnt;
  line_addr_t raddr;

  assign req_ready = !busy;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; resp_valid <= 1'b0; resp_data <= '0;
      n_read <= 0; n_write <= 0; last_write <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (busy) begin
        if (cnt == 1) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_data  <= store.exists(raddr) ? store[raddr] : pattern(raddr);
        end
        cnt <= cnt - 1;
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.laddr] = req.data; n_write <= n_write + 1; last_write <= req;
        end else begin
          busy <= 1'b1; cnt <= LAT - 1; raddr <= req.laddr; n_read <= n_read + 1;
        end
      end
    end
  end
endmodule
