// rprr_top -- integer register-read stage with 17 -> 8 read-port reduction.
//
// Nine integer issue ports (four ALUs, two loads, two store-address, one
// store-data) read their source operands from one centralized PRF that keeps
// only the eight read ports of the ALUs. The memory units borrow those ports
// whenever the ALUs leave them idle, through the connections of the scheme CONN
// (default: the four-connection uniform symmetric scheme of the paper).
//
// Cycle N (issue): the scheduler drives vector a (alu_req, alu_tag) and vector
//   k (mem_req, mem_tag). The port arbiter computes S (sel) and the cancel
//   vector; the crossbar's address half drives the PRF read addresses. A unit
//   flagged in unit_cancel is not issued and must be retried in a later cycle
//   by the scheduler (outside this design).
// Cycle N+1 (read): the PRF returns the data; the crossbar's data half,
//   steered by S registered from cycle N, hands each operand its value.
//   alu_op_valid / mem_op_valid mark the operands read in cycle N; every operand
//   of a cancelled unit is marked invalid, even one that got a port.
// rst_n is a synchronous active-low reset of the valid flags and the delayed S.
// Writes (10 ports: 0-7 ALUs, 8-9 loads) land at the clock edge; see
// rprr_int_prf for the read-during-write rule.
//
// The partition into arbiter, crossbar and PRF and the one-cycle read latency
// are this design's choices; the paper describes the arbitration and the sizes.
module rprr_top
  import rprr_pkg::*;
#(
  parameter conn_matrix_t CONN    = DEFAULT_SCHEME,
  parameter int unsigned  ENTRIES = PRF_ENTRIES,
  parameter int unsigned  XW      = XLEN
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // issue cycle
  input  logic  [NUM_ALU_OPS-1:0]          alu_req,
  input  preg_t [NUM_ALU_OPS-1:0]          alu_tag,
  input  logic  [NUM_MEM_OPS-1:0]          mem_req,
  input  preg_t [NUM_MEM_OPS-1:0]          mem_tag,
  output sel_matrix_t                      sel,
  output logic  [NUM_MEM_UNITS-1:0]        unit_cancel,
  // read cycle
  output logic  [NUM_ALU_OPS-1:0]          alu_op_valid,
  output logic  [NUM_ALU_OPS-1:0][XW-1:0]  alu_op_data,
  output logic  [NUM_MEM_OPS-1:0]          mem_op_valid,
  output logic  [NUM_MEM_OPS-1:0][XW-1:0]  mem_op_data,
  // write-back
  input  logic  [NUM_WR_PORTS-1:0]         wr_en,
  input  preg_t [NUM_WR_PORTS-1:0]         wr_tag,
  input  logic  [NUM_WR_PORTS-1:0][XW-1:0] wr_data
);

  logic  [NUM_MEM_OPS-1:0]           mem_grant;
  preg_t [NUM_OPS-1:0]               op_tag;
  preg_t [NUM_RD_PORTS-1:0]          rd_addr;
  logic  [NUM_RD_PORTS-1:0]          rd_port_en;
  logic  [NUM_RD_PORTS-1:0][XW-1:0]  rd_data;
  logic  [NUM_OPS-1:0][XW-1:0]       op_data;
  sel_matrix_t                       sel_q;
  logic  [NUM_MEM_OPS-1:0]           mem_live;

  rprr_port_arbiter #(.CONN(CONN)) u_arb (
    .alu_req     (alu_req),
    .mem_req     (mem_req),
    .sel         (sel),
    .mem_grant   (mem_grant),
    .unit_cancel (unit_cancel)
  );

  assign op_tag = {mem_tag, alu_tag};

  rprr_read_xbar #(.XW(XW)) u_xbar (
    .sel        (sel),
    .op_tag     (op_tag),
    .rd_addr    (rd_addr),
    .rd_port_en (rd_port_en),
    .sel_data   (sel_q),
    .rd_data    (rd_data),
    .op_data    (op_data)
  );

  rprr_int_prf #(
    .ENTRIES (ENTRIES),
    .NRD     (NUM_RD_PORTS),
    .NWR     (NUM_WR_PORTS),
    .XW      (XW),
    .AW      (PREG_W)
  ) u_prf (
    .clk     (clk),
    .rd_en   (rd_port_en),
    .rd_addr (rd_addr),
    .rd_data (rd_data),
    .wr_en   (wr_en),
    .wr_addr (wr_tag),
    .wr_data (wr_data)
  );

  // Operands of a cancelled unit are dropped, granted or not.
  always_comb begin
    for (int unsigned r = 0; r < NUM_MEM_OPS; r++)
      mem_live[r] = mem_grant[r] && !unit_cancel[mem_op_unit(r)];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q        <= '0;
      alu_op_valid <= '0;
      mem_op_valid <= '0;
    end else begin
      sel_q        <= sel;
      alu_op_valid <= alu_req;
      mem_op_valid <= mem_live;
    end
  end

  assign alu_op_data = op_data[NUM_ALU_OPS-1:0];
  assign mem_op_data = op_data[NUM_OPS-1:NUM_ALU_OPS];

  // An ALU operand is never refused its dedicated port.
  a_alu_port: assert property (@(posedge clk) disable iff (!rst_n)
                                (alu_req & ~rd_port_en) == '0)
    else $error("ALU operand lost its dedicated read port");

endmodule
