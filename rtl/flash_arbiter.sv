// flash_arbiter: shares one flash command port between two requesters.
//
// Requester 0 (the boot selector) has fixed priority over requester 1 (the upgrade
// engine). When the flash accepts a request, the arbiter locks onto that requester
// until the flash's one-cycle response, which goes back only to it; no new request is
// forwarded while locked. Both requesters wait for the response of one request before
// issuing the next, so one lock per request is enough. This arbiter is this design's
// own: in the original system a single processor owned the flash.
module flash_arbiter
  import rfu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // requester 0 (priority)
  input  logic       m0_req_valid,
  input  flash_req_t m0_req,
  output logic       m0_req_ready,
  output logic       m0_rsp_valid,
  // requester 1
  input  logic       m1_req_valid,
  input  flash_req_t m1_req,
  output logic       m1_req_ready,
  output logic       m1_rsp_valid,
  // shared response data
  output flash_rsp_t m_rsp,
  // flash side
  output logic       s_req_valid,
  output flash_req_t s_req,
  input  logic       s_req_ready,
  input  logic       s_rsp_valid,
  input  flash_rsp_t s_rsp
);
  logic locked, owner, sel;

  always_comb begin
    sel          = locked ? owner : !m0_req_valid;
    s_req        = sel ? m1_req : m0_req;
    s_req_valid  = !locked && (sel ? m1_req_valid : m0_req_valid);
    m0_req_ready = !locked && !sel && s_req_ready;
    m1_req_ready = !locked &&  sel && s_req_ready;
    m0_rsp_valid = locked && !owner && s_rsp_valid;
    m1_rsp_valid = locked &&  owner && s_rsp_valid;
    m_rsp        = s_rsp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= 1'b0;
    end else if (!locked && s_req_valid && s_req_ready) begin
      locked <= 1'b1;
      owner  <= sel;
    end else if (locked && s_rsp_valid) begin
      locked <= 1'b0;
    end
  end
endmodule
