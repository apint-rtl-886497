// tb_freexor_unit: random labels, one per cycle; each output must be the XOR
// of its inputs, carry its tag, and appear exactly one cycle later.
module tb_freexor_unit;
  import apint_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  label_t in_a, in_b, out_label;
  logic [7:0] in_tag, out_tag;
  freexor_unit #(.TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  label_t exp_l [256];
  int     t_in [256];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_label !== exp_l[out_tag] || int'($time / 10) - t_in[out_tag] != 1) begin
      failures++; $display("mismatch tag %0d", out_tag);
    end
  end

  initial begin
    in_valid = 0; in_a = 0; in_b = 0; in_tag = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(3) != 0;
      in_a = {$urandom, $urandom, $urandom, $urandom};
      in_b = {$urandom, $urandom, $urandom, $urandom};
      in_tag = 8'(i);
      exp_l[i] = in_a ^ in_b;
      @(posedge clk);
      t_in[i] = int'($time / 10);
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
