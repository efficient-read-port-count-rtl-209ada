// rprr_port_arbiter -- read-port arbitration for the reduced integer PRF.
//
// Every cycle the issue stage presents which operands need a PRF read: vector a
// (alu_req, one bit per ALU operand) and vector k (mem_req, one bit per operand
// of the load, store-address and store-data units). The arbiter fills the
// selection matrix S (sel): row p is a one-hot-or-zero vector over the 17
// operands telling which operand read port p reads this cycle.
//
// Priorities are static, as the paper prescribes:
//   * ALU operand i always owns read port i (ALU unit u: ports 2u, 2u+1);
//   * memory operands only get a port the ALUs leave free, and only a port
//     their row of the connection matrix CONN allows;
//   * among memory operands, loads come before store-address units, which come
//     before the store-data unit. Inside that the order is the row order
//     4s1, 4s2, 5s1, 5s2, 6s1, 6s2, 7s1, 7s2, 8s2 (this design's choice: the
//     paper fixes the unit classes but not the order within a class);
//   * an operand with several connected ports takes the lowest-numbered free one
//     (as in the paper's worked example, where the base operand of unit 4 uses
//     port 1 and falls back to port 4 only when port 1 is taken).
// The loop below states this priority chain directly; synthesis flattens it into
// one sum-of-products expression per element of S, which is the form whose depth
// the paper uses to compare schemes.
//
// A memory unit whose requested operand got no port is cancelled (unit_cancel)
// and retried by the scheduler in a later cycle. A port already granted to
// another operand of a cancelled unit is not passed on to a lower-priority
// operand; that keeps the logic single-pass (own choice, the paper is silent).
//
// Purely combinational: inputs and outputs belong to the same (issue) cycle.
module rprr_port_arbiter
  import rprr_pkg::*;
#(
  parameter conn_matrix_t CONN = DEFAULT_SCHEME
) (
  input  logic [NUM_ALU_OPS-1:0]   alu_req,     // vector a
  input  logic [NUM_MEM_OPS-1:0]   mem_req,     // vector k
  output sel_matrix_t              sel,         // matrix S
  output logic [NUM_MEM_OPS-1:0]   mem_grant,   // memory operand got a port
  output logic [NUM_MEM_UNITS-1:0] unit_cancel  // memory unit 4..8 cancelled
);

  always_comb begin
    port_mask_t busy;
    logic       placed;
    sel       = '0;
    mem_grant = '0;
    busy      = alu_req;
    for (int unsigned p = 0; p < NUM_RD_PORTS; p++)
      sel[p][p] = alu_req[p];
    for (int unsigned r = 0; r < NUM_MEM_OPS; r++) begin
      placed = 1'b0;
      for (int unsigned p = 0; p < NUM_RD_PORTS; p++) begin
        if (mem_req[r] && !placed && CONN[r][p] && !busy[p]) begin
          sel[p][NUM_ALU_OPS + r] = 1'b1;
          busy[p]                 = 1'b1;
          placed                  = 1'b1;
        end
      end
      mem_grant[r] = placed;
    end
  end

  always_comb begin
    unit_cancel = '0;
    for (int unsigned r = 0; r < NUM_MEM_OPS; r++)
      if (mem_req[r] && !mem_grant[r]) unit_cancel[mem_op_unit(r)] = 1'b1;
  end

  // Each read port serves at most one operand.
  always_comb begin
    for (int unsigned p = 0; p < NUM_RD_PORTS; p++)
      assert ((sel[p] & (sel[p] - op_sel_t'(1))) == '0)
        else $error("read port %0d selected for more than one operand", p);
  end

endmodule
