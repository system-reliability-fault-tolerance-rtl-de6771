// dmmr_pkg: sizes and types shared by the DMMR (distributed minority and
// majority voting based redundancy) system.
//
// The replicated function module is a 4x4 unsigned array multiplier, so every
// module output, and every voter word, is 8 bits wide. The K and M defaults
// describe the 5-of-7 DMMR configuration: five modules in the majority logic
// group and two in the minority logic group. K, M and the operand width follow
// the published configuration; the type names are this design's own.
package dmmr_pkg;

  // Operand width of the function module (4x4 multiplier).
  localparam int unsigned OP_W   = 4;
  // Width of one module output word (the product).
  localparam int unsigned PROD_W = 2 * OP_W;

  // Default group sizes: 5-of-7 DMMR.
  localparam int unsigned MAJ_K  = 5;
  localparam int unsigned SYS_M  = 7;

  typedef logic [OP_W-1:0]   operand_t;
  typedef logic [PROD_W-1:0] product_t;

endpackage
