// freexor_unit: FreeXOR gate unit.
//
// With FreeXOR the 0-label of an XOR gate's output is the XOR of its input
// 0-labels (garbling), and the active output label is the XOR of the active
// input labels (evaluation), so the same bitwise XOR serves both modes and no
// garbled table is produced. The result is registered: out_valid follows
// in_valid by one cycle, as the paper gives. A tag travels alongside.
module freexor_unit
  import apint_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  label_t           in_a,
  input  label_t           in_b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output label_t           out_label,
  output logic [TAG_W-1:0] out_tag
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    out_label <= in_a ^ in_b;
    out_tag   <= in_tag;
  end
endmodule
