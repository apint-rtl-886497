// tb_pe: a mixed stream of FreeXOR and Half-Gate operations through the PE.
//
// In garbling mode the OP bit must steer each operation to the right unit:
// XOR results after 1 cycle, AND results after 21 cycles with the reference
// output label and garbled table, and a table only for AND gates. The driver
// holds an operation back when its result would finish in the same cycle as
// an earlier one, as the core's slot reservation does.
module tb_pe;
  import apint_pkg::*;
  import gc_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  mode_e   mode;
  label_t  r_delta, in_a, in_b, out_label;
  logic    in_valid, out_valid, tbl_valid;
  op_e     in_op;
  logic [GIDX_W-1:0] in_gidx;
  gtable_t in_table, tbl_data;
  logic [7:0] in_tag, out_tag;
  pe #(.TAG_W(8)) dut (.*);

  int checks = 0, failures = 0, n_and = 0, n_xor = 0;
  label_t  exp_l [256];
  gtable_t exp_t [256];
  bit      is_and [256];
  int      t_in [256];
  bit      busy_slot [int];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int i = int'(out_tag);
    automatic int lat = int'($time / 10) - t_in[i];
    checks++;
    if (out_label !== exp_l[i] || lat != (is_and[i] ? 21 : 1) || tbl_valid !== is_and[i] ||
        (is_and[i] && tbl_data !== exp_t[i])) begin
      failures++; $display("mismatch op %0d tag %0d lat %0d", is_and[i], i, lat);
    end
    if (is_and[i]) n_and++; else n_xor++;
  end

  initial begin
    int g = 0, now;
    mode = MODE_GARBLE;
    r_delta = {$urandom, $urandom, $urandom, $urandom} | 128'h1;
    in_valid = 0; in_a = 0; in_b = 0; in_tag = 0; in_op = OP_XOR; in_gidx = 0; in_table = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      logic [127:0] tg, te;
      @(negedge clk);
      now = int'($time / 10) + 1;
      in_op = $urandom_range(1) ? OP_AND : OP_XOR;
      in_valid = !busy_slot.exists(now + (in_op == OP_AND ? 21 : 1));
      in_a = {$urandom, $urandom, $urandom, $urandom};
      in_b = {$urandom, $urandom, $urandom, $urandom};
      in_tag = 8'(i);
      in_gidx = GIDX_W'(g);
      is_and[i] = in_op == OP_AND;
      if (is_and[i]) begin
        exp_l[i] = garble_and(in_a, in_b, r_delta, g, tg, te);
        exp_t[i] = '{tg: tg, te: te};
      end else exp_l[i] = in_a ^ in_b;
      if (in_valid) begin
        busy_slot[now + (in_op == OP_AND ? 21 : 1)] = 1;
        if (is_and[i]) g++;
      end
      @(posedge clk);
      t_in[i] = int'($time / 10);
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (n_and == 0 || n_xor == 0) begin failures++; $display("an op type never completed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
