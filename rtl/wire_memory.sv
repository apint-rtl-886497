// wire_memory: one core's Wire Memory with its BlockBit and OoRBit flags.
//
// Each of the DEPTH addresses holds a 128-bit wire label plus two flags. The
// BlockBit marks an address whose next content is still being produced
// (preempted by an instruction, or the target of an OoRW transfer) and must not
// be read; the OoRBit says the pending content is an out-of-range wire coming
// from the OoRW Prefetch Buffer rather than from the PE. The default size,
// 8192 labels of 128 bits, is the paper's 128KB. The labels are an SRAM-like
// array; the flags are registers, as the paper keeps its special bits in
// registers.
//
// Ports and timing:
//   - two read ports with one-cycle registered data (rd_en, rd_addr*);
//   - combinational flag lookups for the two read addresses and the write
//     address of the instruction being issued;
//   - pre_*:  preempt an address for a future PE write (set BlockBit);
//   - mark_*: two ports that reserve an address for an OoRW transfer (set
//             BlockBit and OoRBit);
//   - wb_*:   PE write-back (write label, clear BlockBit);
//   - xf_*:   OoRW transfer or initial load (write label, clear both flags).
// Within one cycle the clears take effect before the sets. The core never
// points two writes at one address in the same cycle.
module wire_memory
  import apint_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic   clk,
  input  logic   rst_n,
  // read
  input  logic   rd_en,
  input  waddr_t rd_addr0,
  input  waddr_t rd_addr1,
  output label_t rd_data0,
  output label_t rd_data1,
  // flag lookups
  input  waddr_t q_wr_addr,
  output logic   q_block0, q_oor0,
  output logic   q_block1, q_oor1,
  output logic   q_block_wr,
  // flag updates
  input  logic   pre_valid,
  input  waddr_t pre_addr,
  input  logic   mark_valid0,
  input  waddr_t mark_addr0,
  input  logic   mark_valid1,
  input  waddr_t mark_addr1,
  // writes
  input  logic   wb_valid,
  input  waddr_t wb_addr,
  input  label_t wb_data,
  input  logic   xf_valid,
  input  waddr_t xf_addr,
  input  label_t xf_data
);
  label_t mem   [DEPTH];
  logic   block [DEPTH];
  logic   oor   [DEPTH];

  assign q_block0   = block[rd_addr0];
  assign q_oor0     = oor[rd_addr0];
  assign q_block1   = block[rd_addr1];
  assign q_oor1     = oor[rd_addr1];
  assign q_block_wr = block[q_wr_addr];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data0 <= mem[rd_addr0];
      rd_data1 <= mem[rd_addr1];
    end
    if (wb_valid) mem[wb_addr] <= wb_data;
    if (xf_valid) mem[xf_addr] <= xf_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        block[i] <= 1'b0;
        oor[i]   <= 1'b0;
      end
    end else begin
      if (wb_valid) block[wb_addr] <= 1'b0;
      if (xf_valid) begin
        block[xf_addr] <= 1'b0;
        oor[xf_addr]   <= 1'b0;
      end
      if (pre_valid) block[pre_addr] <= 1'b1;
      if (mark_valid0) begin
        block[mark_addr0] <= 1'b1;
        oor[mark_addr0]   <= 1'b1;
      end
      if (mark_valid1) begin
        block[mark_addr1] <= 1'b1;
        oor[mark_addr1]   <= 1'b1;
      end
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(wb_valid && xf_valid && wb_addr == xf_addr))
    else $error("wire_memory: two writes to one address");
endmodule
