// ext_pkg: shared constants, types and CSR encodings of the loop-control and
// memory-streaming extensions of a SIMT (Vortex-style) GPGPU core.
//
// The extensions are programmed through an 8-bit CSR address that carries the
// unit type (CFM or DMSL), the unit ID and the register number. The register
// numbers and bit fields follow the configuration-register table of the design
// (CFM: 0 start PC, 1 end PC, 2 end tmask, 3 {enable[31], bound[30:0]},
// 4 loop state; DMSL: 0 base address, 1 {redirect[11], prefetch[10],
// precision[9:7], FP/INT[6:5], RF reg[4:0]}, 5 address stride).
// This design's own choices: the address split addr[7] = unit type,
// addr[6:4] = unit ID, addr[3:0] = register number; DMSL register 5+l holds
// the stride of loop level l; DMSL register 1 bits [13:12] hold the stream
// direction (read or write), a field the table does not list.
// The default sizes are the main configuration: 8 warps, 16 threads,
// 3 DMSLs, 3 data-cache ports, FIFOs of 16 credits. The number of nested
// loops (4) is this design's choice.
package ext_pkg;

  localparam int unsigned XLEN = 32;

  // CSR address fields
  localparam int unsigned CSR_ADDR_W = 8;
  localparam logic        CSR_UNIT_CFM  = 1'b0;
  localparam logic        CSR_UNIT_DMSL = 1'b1;

  // CFM register numbers
  localparam logic [3:0] CFM_REG_START  = 4'd0;
  localparam logic [3:0] CFM_REG_END    = 4'd1;
  localparam logic [3:0] CFM_REG_TMASK  = 4'd2;
  localparam logic [3:0] CFM_REG_BOUND  = 4'd3;
  localparam logic [3:0] CFM_REG_STATE  = 4'd4;

  // DMSL register numbers
  localparam logic [3:0] DMSL_REG_BASE   = 4'd0;
  localparam logic [3:0] DMSL_REG_CFG    = 4'd1;
  localparam logic [3:0] DMSL_REG_STRIDE = 4'd5;  // 5 + loop level

  // Register-file operand identifier: {is_fp, register index}
  localparam int unsigned RID_W = 6;

  typedef enum logic [2:0] {
    PREC_32 = 3'd0,
    PREC_16 = 3'd1,
    PREC_8  = 3'd2
  } prec_e;

  typedef enum logic [1:0] {
    DIR_READ  = 2'd0,
    DIR_WRITE = 2'd1
  } dir_e;

  // DMSL configuration register (register 1)
  typedef struct packed {
    logic [17:0] rsvd;
    dir_e        dir;       // [13:12]
    logic        redirect;  // [11]
    logic        prefetch;  // [10]
    prec_e       prec;      // [9:7]
    logic [1:0]  fpint;     // [6:5]: 0 integer, 1 floating point
    logic [4:0]  rfreg;     // [4:0]
  } dmsl_cfg_t;

  function automatic logic csr_unit(input logic [CSR_ADDR_W-1:0] a);
    return a[7];
  endfunction

  function automatic logic [2:0] csr_id(input logic [CSR_ADDR_W-1:0] a);
    return a[6:4];
  endfunction

  function automatic logic [3:0] csr_reg(input logic [CSR_ADDR_W-1:0] a);
    return a[3:0];
  endfunction

endpackage
