// pe: processing engine of one core, a FreeXOR unit and a Half-Gate unit.
//
// The OP bit of the instruction steers the two input labels to the FreeXOR
// unit (OP = 0, one cycle) or to the Half-Gate unit (OP = 1, 18 cycles when
// evaluating, 21 when garbling). Both units accept a new gate every cycle, so
// results can leave out of order; the core reserves write-back slots so that
// the two units never finish in the same cycle, and an assertion checks that
// rule here. When garbling, every AND gate also emits its garbled table on
// tbl_valid/tbl_data, bound for DRAM.
module pe
  import apint_pkg::*;
#(
  parameter int unsigned  EVAL_LAT   = 18,
  parameter int unsigned  GARBLE_LAT = 21,
  parameter int unsigned  TAG_W      = 16,
  parameter logic [127:0] AES_KEY    = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mode_e            mode,
  input  label_t           r_delta,
  input  logic             in_valid,
  input  op_e              in_op,
  input  label_t           in_a,
  input  label_t           in_b,
  input  logic [GIDX_W-1:0] in_gidx,
  input  gtable_t          in_table,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output label_t           out_label,
  output logic [TAG_W-1:0] out_tag,
  output logic             tbl_valid,
  output gtable_t          tbl_data
);
  logic             x_valid, h_valid;
  label_t           x_label, h_label;
  logic [TAG_W-1:0] x_tag,   h_tag;
  gtable_t          h_table;

  freexor_unit #(.TAG_W(TAG_W)) u_xor (
    .clk, .rst_n,
    .in_valid (in_valid && in_op == OP_XOR), .in_a, .in_b, .in_tag,
    .out_valid(x_valid), .out_label(x_label), .out_tag(x_tag)
  );

  halfgate_unit #(.EVAL_LAT(EVAL_LAT), .GARBLE_LAT(GARBLE_LAT), .TAG_W(TAG_W),
                  .AES_KEY(AES_KEY)) u_hg (
    .clk, .rst_n, .mode, .r_delta,
    .in_valid (in_valid && in_op == OP_AND), .in_a, .in_b, .in_gidx, .in_table, .in_tag,
    .out_valid(h_valid), .out_label(h_label), .out_table(h_table), .out_tag(h_tag)
  );

  assign out_valid = x_valid | h_valid;
  assign out_label = h_valid ? h_label : x_label;
  assign out_tag   = h_valid ? h_tag   : x_tag;
  assign tbl_valid = h_valid && mode == MODE_GARBLE;
  assign tbl_data  = h_table;

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(x_valid && h_valid))
    else $error("pe: FreeXOR and Half-Gate results collided");
endmodule
