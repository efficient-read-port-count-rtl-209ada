// rprr_int_prf -- centralized integer physical register file, 8 read / 10 write.
//
// ENTRIES registers of XW bits. The paper gives the entry count (180), the ten
// write ports (eight for the ALUs, two for the load units) and the eight read
// ports left after the reduction. Everything about the timing is this design's
// choice:
//   * reads are synchronous: the address presented in cycle N gives rd_data in
//     cycle N+1 (registered output; a port that is not enabled keeps its
//     previous output);
//   * writes take effect at the clock edge; a read of the same entry in the same
//     cycle returns the old value (a value that young comes from the bypass
//     network, outside this block);
//   * two write ports never write the same entry in one cycle (register
//     renaming gives every result its own register); an assertion checks it,
//     and the higher-numbered port would win;
//   * the storage has no reset.
module rprr_int_prf
  import rprr_pkg::*;
#(
  parameter int unsigned ENTRIES = PRF_ENTRIES,
  parameter int unsigned NRD     = NUM_RD_PORTS,
  parameter int unsigned NWR     = NUM_WR_PORTS,
  parameter int unsigned XW      = XLEN,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic                     clk,
  input  logic [NRD-1:0]           rd_en,
  input  logic [NRD-1:0][AW-1:0]   rd_addr,
  output logic [NRD-1:0][XW-1:0]   rd_data,
  input  logic [NWR-1:0]           wr_en,
  input  logic [NWR-1:0][AW-1:0]   wr_addr,
  input  logic [NWR-1:0][XW-1:0]   wr_data
);

  logic [XW-1:0] regs [ENTRIES];

  always_ff @(posedge clk) begin
    for (int unsigned w = 0; w < NWR; w++)
      if (wr_en[w] && 32'(wr_addr[w]) < ENTRIES) regs[wr_addr[w]] <= wr_data[w];
  end

  always_ff @(posedge clk) begin
    for (int unsigned p = 0; p < NRD; p++)
      if (rd_en[p] && 32'(rd_addr[p]) < ENTRIES) rd_data[p] <= regs[rd_addr[p]];
  end

  // No two write ports to the same entry in one cycle.
  always_ff @(posedge clk) begin
    for (int unsigned w = 0; w < NWR; w++)
      for (int unsigned v = w + 1; v < NWR; v++)
        assert (!(wr_en[w] && wr_en[v] && wr_addr[w] == wr_addr[v]))
          else $error("write ports %0d and %0d both write entry %0d", w, v, wr_addr[w]);
  end

endmodule
