// PLIC fan-in: picks the highest-priority candidate among N.
//
// Each candidate carries a valid flag and a priority (physical interrupts after the
// "format to VIIR" step, and the VIIRs of the injection block attached to the context).
// The result is the priority and index of the winner; a candidate only competes with a
// non-zero priority, so max_prio_o is 0 when nothing is pending. Ties go to the lowest
// index, so physical interrupts (placed first by the caller) win over virtual ones of the
// same priority. The tie rule is this design's choice. Purely combinational.
module plic_fanin #(
  parameter int unsigned N      = 8,
  parameter int unsigned PRIO_W = 3,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]             valid_i,
  input  logic [N-1:0][PRIO_W-1:0] prio_i,
  output logic [PRIO_W-1:0]        max_prio_o,
  output logic [IDX_W-1:0]         max_idx_o
);
  always_comb begin
    max_prio_o = '0;
    max_idx_o  = '0;
    for (int i = 0; i < N; i++) begin
      if (valid_i[i] && prio_i[i] > max_prio_o) begin
        max_prio_o = prio_i[i];
        max_idx_o  = IDX_W'(i);
      end
    end
  end
endmodule
