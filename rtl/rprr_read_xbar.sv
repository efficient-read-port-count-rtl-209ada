// rprr_read_xbar -- operand-to-read-port crossbar of the reduced integer PRF.
//
// Two halves, both steered by the selection matrix S of the port arbiter:
//   * address half (issue cycle): each read port p takes the physical register
//     number of the operand that row S[p] selects, and is enabled when the row
//     is not empty (rd_port_en);
//   * data half (cycle the PRF returns data): each operand o receives the data
//     of the read port whose row of the delayed S (sel_data) has bit o set.
// S is one-hot per port and each operand is granted at most one port, so both
// halves are plain AND-OR multiplexers. ALU operands always map to their own
// port; memory operands go through the full crossbar. The multiplexer circuit
// is this design's choice; the paper defines only S.
//
// Purely combinational; the pipeline register for sel_data lives in the caller.
module rprr_read_xbar
  import rprr_pkg::*;
#(
  parameter int unsigned XW = XLEN
) (
  // address half
  input  sel_matrix_t                     sel,
  input  preg_t [NUM_OPS-1:0]             op_tag,
  output preg_t [NUM_RD_PORTS-1:0]        rd_addr,
  output logic  [NUM_RD_PORTS-1:0]        rd_port_en,
  // data half
  input  sel_matrix_t                     sel_data,
  input  logic  [NUM_RD_PORTS-1:0][XW-1:0] rd_data,
  output logic  [NUM_OPS-1:0][XW-1:0]      op_data
);

  always_comb begin
    for (int unsigned p = 0; p < NUM_RD_PORTS; p++) begin
      rd_addr[p]    = '0;
      rd_port_en[p] = |sel[p];
      for (int unsigned o = 0; o < NUM_OPS; o++)
        rd_addr[p] |= op_tag[o] & {PREG_W{sel[p][o]}};
    end
  end

  always_comb begin
    for (int unsigned o = 0; o < NUM_OPS; o++) begin
      op_data[o] = '0;
      for (int unsigned p = 0; p < NUM_RD_PORTS; p++)
        op_data[o] |= rd_data[p] & {XW{sel_data[p][o]}};
    end
  end

endmodule
