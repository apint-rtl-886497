// apint_pkg: types and constants shared by the garbled-circuit accelerator.
//
// The instruction word follows the field list of the accelerator's
// instruction memory: two 13-bit read addresses (26 bits), two OoRW-fetch
// bits, a 13-bit write address, and one bit each for WEN, OP and LIVE, 44 bits
// in all. The field widths are the paper's; the order of the fields inside
// the word (most significant first, in the order listed) is this design's
// choice. Wire labels are 128 bits (AES-128 security), so the 128KB Wire
// Memory holds 8192 labels, which is exactly what a 13-bit address reaches.
package apint_pkg;

  localparam int unsigned LABEL_W   = 128;        // wire label width
  localparam int unsigned WADDR_W   = 13;         // Wire Memory address width
  localparam int unsigned GIDX_W    = 32;         // Half-Gate gate-index counter

  typedef logic [LABEL_W-1:0] label_t;
  typedef logic [WADDR_W-1:0] waddr_t;

  // OP bit: 0 selects FreeXOR, 1 selects Half-Gate (as printed at the PE's
  // "is OP?" selector).
  typedef enum logic {OP_XOR = 1'b0, OP_AND = 1'b1} op_e;

  // Operating mode of the whole accelerator: the client garbles, the server
  // evaluates. The mode is static during a run.
  typedef enum logic {MODE_EVAL = 1'b0, MODE_GARBLE = 1'b1} mode_e;

  typedef struct packed {
    waddr_t     rd_addr0;    // RD Addr[26], first input wire
    waddr_t     rd_addr1;    //              second input wire
    logic [1:0] oorw_fetch;  // [0]: after reading rd_addr0, [1]: after rd_addr1
    waddr_t     wr_addr;     // WR Addr[13]
    logic       wen;         // Write Enable Not: 1 = do not write Wire Memory
    op_e        op;          // OP[1]
    logic       live;        // LIVE[1]: also write the output wire to DRAM
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);  // 44

  // Garbled table of one AND gate: generator half and evaluator half.
  typedef struct packed {
    label_t tg;
    label_t te;
  } gtable_t;

endpackage
