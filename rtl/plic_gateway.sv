// PLIC interrupt gateway for one level-triggered source.
//
// Converts a level interrupt line into a single pending request: while the line is high
// and no request of this source is in flight, valid_o is raised; when the PLIC core takes
// it (ready_i, i.e. the pending bit is free) the gateway marks the request in flight and
// raises nothing more until the handler writes complete (complete_i). This is the
// valid/ready/complete handshake of the gateway boxes of the PLICv block diagram; that it
// is level-triggered and that the in-flight flag resets to 0 is this design's choice.
module plic_gateway (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic irq_i,       // device interrupt line (level)
  output logic valid_o,     // request to set the pending bit
  input  logic ready_i,     // pending bit can accept the request
  input  logic complete_i   // handler finished: accept the next request
);
  logic in_flight_q;

  assign valid_o = irq_i && !in_flight_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                   in_flight_q <= 1'b0;
    else if (complete_i)           in_flight_q <= 1'b0;
    else if (valid_o && ready_i)   in_flight_q <= 1'b1;
  end
endmodule
