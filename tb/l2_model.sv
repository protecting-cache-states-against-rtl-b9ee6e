// l2_model: behavioural stand-in for the L2 when an L1 cache is tested alone.
// Always ready. A read is answered exactly LAT cycles after its handshake with
// SourceLevel 2 and the line last written back (else star_tb_pkg::pattern).
// Write-backs are stored; forwarded SFill-Inv requests are counted and the
// last one kept, so a testbench can see what the L1 passed on.
module l2_model
  import star_pkg::*;
  import star_tb_pkg::*;
#(
  parameter int LAT = 5
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  l2_req_t   req,
  output logic      resp_valid,
  output l2_resp_t  resp,
  output int        n_read,
  output int        n_wb,
  output int        n_sfinv,
  output l2_req_t   last_wb,
  output l2_req_t   last_sfinv
);
  line_t      store [line_addr_t];
  logic       busy;
  int         cnt;
  line_addr_t raddr;

  assign req_ready = 1'b1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; resp_valid <= 1'b0; resp <= '0;
      n_read <= 0; n_wb <= 0; n_sfinv <= 0; last_wb <= '0; last_sfinv <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (busy) begin
        if (cnt == 1) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp.data  <= store.exists(raddr) ? store[raddr] : pattern(raddr);
          resp.src   <= SRC_L2;
        end
        cnt <= cnt - 1;
      end
      if (req_valid && req_ready) begin
        unique case (req.kind)
          L2_READ:  begin busy <= 1'b1; cnt <= LAT - 1; raddr <= req.laddr; n_read <= n_read + 1; end
          L2_WB:    begin store[req.laddr] = req.data; last_wb <= req; n_wb <= n_wb + 1; end
          L2_SFINV: begin last_sfinv <= req; n_sfinv <= n_sfinv + 1; end
          default: ;
        endcase
      end
    end
  end
endmodule
