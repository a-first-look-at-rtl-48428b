// ptw_arbiter: shares one page-table walker between the instruction and the data TLB.
//
// Fixed priority to the data TLB (index 1) when both miss at once, as the walker can only
// serve one walk at a time; the response goes back to the TLB whose request was taken.
// The walker accepts a request only in its idle state, so the grant is remembered from the
// accepted request until the response. Arbitration order is this design's choice.
module ptw_arbiter
  import hyp_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [1:0]      req_valid_i,
  output logic [1:0]      req_ready_o,
  input  ptw_req_t [1:0]  req_i,
  output logic [1:0]      resp_valid_o,
  output logic            ptw_req_valid_o,
  input  logic            ptw_req_ready_i,
  output ptw_req_t        ptw_req_o,
  input  logic            ptw_resp_valid_i
);
  logic sel, owner_q;
  assign sel             = req_valid_i[1];
  assign ptw_req_valid_o = |req_valid_i;
  assign ptw_req_o       = req_i[sel];
  assign req_ready_o     = {sel, !sel} & {2{ptw_req_ready_i}};
  assign resp_valid_o    = {owner_q, !owner_q} & {2{ptw_resp_valid_i}};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                    owner_q <= 1'b0;
    else if (ptw_req_valid_o && ptw_req_ready_i)    owner_q <= sel;
  end
endmodule
