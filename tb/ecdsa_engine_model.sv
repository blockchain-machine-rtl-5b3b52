// ecdsa_engine_model: behavioural stand-in for an ECDSA P-256 verification
// engine, for simulation only. It is not a signature verifier: a request
// counts as valid when sig_r == hash ^ key_x (see tb_pkg::mk_req). It accepts
// one request when idle (req_ready high), answers LAT cycles later with a
// one-cycle resp_valid pulse and the ok bit, and counts the requests it served.
module ecdsa_engine_model
  import bmac_pkg::*;
#(
  parameter int LAT = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  ecdsa_req_t req,
  output logic       resp_valid,
  output logic       resp_ok,
  output int         served
);
  int   cnt;
  logic busy, ok_r;

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; ok_r <= 1'b0;
      resp_valid <= 1'b0; resp_ok <= 1'b0; served <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy   <= 1'b1;
        cnt    <= LAT - 1;
        ok_r   <= (req.sig_r == (req.hash ^ req.key_x));
        served <= served + 1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_ok    <= ok_r;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
