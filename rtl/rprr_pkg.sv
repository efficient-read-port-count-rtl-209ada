// rprr_pkg -- shared sizes, types and connection matrices of the reduced-read-port
// integer register-read stage.
//
// The core has nine integer functional units behind nine issue ports: four ALUs
// (units 0-3, two operands each), two load units (4, 5), two store-address units
// (6, 7) and one store-data unit (8, one operand, named s2). Without reduction
// they need 17 PRF read ports; the scheme keeps the 8 ALU ports and lets the 9
// memory-unit operands share them.
//
// Operand numbering follows the paper's matrix S[0..7][0..16]: operands 0..7 are
// the ALU operands (unit u: s1 = 2u, s2 = 2u+1, which also own read ports 2u and
// 2u+1), operands 8..16 are the memory operands 4s1, 4s2, 5s1, 5s2, 6s1, 6s2,
// 7s1, 7s2, 8s2.
//
// A connection matrix (conn_matrix_t) has one 8-bit row per memory operand; bit p
// set means that operand may be read through read port p. In the literals below
// port 7 is the most significant bit and row 0 (operand 4s1) is the rightmost
// element of the concatenation, so each printed matrix row reads right to left.
// The matrices are the ones printed in the paper's figures; SCHEME_FIG12 (four
// connections per mask) is the default of the design, the others are kept so
// the schemes the paper compares can be selected and analysed.
//
// The mask functions implement the paper's scheme classification: a mask is a
// distinct row; a scheme is symmetric when its masks are pairwise disjoint and
// together cover all read ports, and uniform symmetric when in addition every
// mask has the same number of connections.
package rprr_pkg;

  localparam int unsigned NUM_ALU       = 4;
  localparam int unsigned NUM_RD_PORTS  = 8;   // remaining read ports (17 -> 8)
  localparam int unsigned NUM_ALU_OPS   = 8;   // = NUM_RD_PORTS, one dedicated port each
  localparam int unsigned NUM_MEM_UNITS = 5;   // units 4..8
  localparam int unsigned NUM_MEM_OPS   = 9;   // 2+2+2+2+1 operands
  localparam int unsigned NUM_OPS       = NUM_ALU_OPS + NUM_MEM_OPS;  // 17
  localparam int unsigned NUM_WR_PORTS  = 10;  // 8 ALU + 2 load
  localparam int unsigned PRF_ENTRIES   = 180;
  localparam int unsigned XLEN          = 64;  // own choice: x86-64 integer registers

  localparam int unsigned PREG_W = $clog2(PRF_ENTRIES);

  typedef logic [PREG_W-1:0]        preg_t;
  typedef logic [XLEN-1:0]          xlen_t;
  typedef logic [NUM_RD_PORTS-1:0]  port_mask_t;
  typedef port_mask_t [NUM_MEM_OPS-1:0] conn_matrix_t;
  typedef logic [NUM_OPS-1:0]       op_sel_t;     // one row of S: operand read by a port
  typedef op_sel_t [NUM_RD_PORTS-1:0] sel_matrix_t;

  // Memory operand row -> memory unit (0 = unit 4 ... 4 = unit 8)
  function automatic int unsigned mem_op_unit(int unsigned r);
    return r / 2;
  endfunction

  // Fig. 1 (worked example of Sec. IV)
  localparam conn_matrix_t SCHEME_FIG1 = {
      8'b00100001, 8'b01001000, 8'b00100001, 8'b00010010, 8'b10000100,
      8'b00100001, 8'b01001000, 8'b10000100, 8'b00010010};
  // Fig. 2: symmetric, 7 masks, critical path 3
  localparam conn_matrix_t SCHEME_FIG2 = {
      8'b01000000, 8'b10000000, 8'b01000000, 8'b00100000, 8'b00010000,
      8'b00001010, 8'b00000100, 8'b00001010, 8'b00000001};
  // Fig. 3: intersecting masks (9), critical path 4
  localparam conn_matrix_t SCHEME_FIG3 = {
      8'b01000000, 8'b10000000, 8'b01001000, 8'b00100000, 8'b00010000,
      8'b00001010, 8'b00000100, 8'b00000010, 8'b00000001};
  // Figs. 5, 6, 7: arbitrary uniform symmetric schemes, 1, 2, 4 connections
  localparam conn_matrix_t SCHEME_FIG5 = {
      8'b00010000, 8'b10000000, 8'b01000000, 8'b00100000, 8'b00010000,
      8'b00001000, 8'b00000100, 8'b00000010, 8'b00000001};
  localparam conn_matrix_t SCHEME_FIG6 = {
      8'b00100001, 8'b10000100, 8'b00100001, 8'b00010010, 8'b01001000,
      8'b00100001, 8'b10000100, 8'b01001000, 8'b00010010};
  localparam conn_matrix_t SCHEME_FIG7 = {
      8'b01100110, 8'b10011001, 8'b01100110, 8'b10011001, 8'b01100110,
      8'b10011001, 8'b01100110, 8'b01100110, 8'b10011001};
  // Figs. 10, 11, 12: efficient uniform symmetric schemes, 1, 2, 4 connections
  localparam conn_matrix_t SCHEME_FIG10 = {
      8'b00000010, 8'b00100000, 8'b10000000, 8'b00000010, 8'b00001000,
      8'b00010000, 8'b01000000, 8'b00000001, 8'b00000100};
  localparam conn_matrix_t SCHEME_FIG11 = {
      8'b00001001, 8'b01100000, 8'b00001001, 8'b00000110, 8'b10010000,
      8'b00001001, 8'b01100000, 8'b10010000, 8'b00000110};
  localparam conn_matrix_t SCHEME_FIG12 = {
      8'b01101001, 8'b10010110, 8'b01101001, 8'b01101001, 8'b10010110,
      8'b10010110, 8'b01101001, 8'b01101001, 8'b10010110};

  localparam conn_matrix_t DEFAULT_SCHEME = SCHEME_FIG12;

  // Number of distinct rows (masks) of a scheme.
  function automatic int unsigned num_masks(conn_matrix_t c);
    int unsigned n;
    logic        seen;
    n = 0;
    for (int unsigned r = 0; r < NUM_MEM_OPS; r++) begin
      seen = 1'b0;
      for (int unsigned q = 0; q < r; q++)
        if (c[q] == c[r]) seen = 1'b1;
      if (!seen) n++;
    end
    return n;
  endfunction

  // Masks pairwise disjoint and their union covers every read port.
  function automatic bit is_symmetric(conn_matrix_t c);
    port_mask_t all;
    bit         ok;
    all = '0;
    ok  = 1'b1;
    for (int unsigned r = 0; r < NUM_MEM_OPS; r++) begin
      all |= c[r];
      for (int unsigned q = 0; q < r; q++)
        if (c[q] != c[r] && (c[q] & c[r]) != '0) ok = 1'b0;
    end
    return ok && (all == '1);
  endfunction

  // Symmetric, and every mask has the same number of connections.
  function automatic bit is_uniform_symmetric(conn_matrix_t c);
    bit ok;
    ok = is_symmetric(c);
    for (int unsigned r = 1; r < NUM_MEM_OPS; r++)
      if ($countones(c[r]) != $countones(c[0])) ok = 1'b0;
    return ok;
  endfunction

endpackage
