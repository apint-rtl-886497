// tb_halfgate_unit: checks the Half-Gate unit against the reference model.
//
// 1. The reference AES is checked against the FIPS-197 example.
// 2. Garbling: 24 random AND gates enter back to back; each output 0-label and
//    garbled table must equal the reference, 21 cycles after entry.
// 3. Evaluation: the same gates are evaluated with active labels for random
//    plaintext bits and the garbled tables from step 2; each output must be
//    the 0-label, or the 0-label XOR R when both bits are 1, after 18 cycles.
module tb_halfgate_unit;
  import apint_pkg::*;
  import gc_ref_pkg::*;

  localparam int N = 24;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts
  always #5 clk = ~clk;

  mode_e   mode;
  label_t  r_delta, in_a, in_b, out_label;
  logic    in_valid, out_valid;
  logic [GIDX_W-1:0] in_gidx;
  gtable_t in_table, out_table;
  logic [7:0] in_tag, out_tag;

  halfgate_unit #(.TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  label_t a0 [N], b0 [N], c0 [N];
  gtable_t tb [N];
  bit xa [N], xb [N];
  int t_in [N];
  int n_out;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int i = int'(out_tag);
    automatic int lat = int'($time / 10) - t_in[i];  // cycles from input to output
    checks++;
    if (mode == MODE_GARBLE) begin
      if (out_label !== c0[i] || out_table !== tb[i]) begin
        failures++; $display("garble mismatch gate %0d", i);
      end
      if (lat != 21) begin failures++; $display("garble latency %0d", lat); end
    end else begin
      automatic label_t exp = c0[i] ^ ((xa[i] & xb[i]) ? r_delta : '0);
      if (out_label !== exp) begin failures++; $display("eval mismatch gate %0d", i); end
      if (lat != 18) begin failures++; $display("eval latency %0d", lat); end
    end
    checks++;
    n_out++;
  end

  task automatic drive(int i, label_t a, label_t b, gtable_t t);
    in_valid <= 1; in_a <= a; in_b <= b; in_gidx <= GIDX_W'(i); in_table <= t; in_tag <= 8'(i);
    @(posedge clk);
    t_in[i] = int'($time / 10);
  endtask

  initial begin
    checks++;
    if (aes_enc(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff)
        !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++; $display("reference AES wrong");
    end
    r_delta = {$urandom, $urandom, $urandom, $urandom} | 128'h1;
    mode = MODE_GARBLE; in_valid = 0; in_a = 0; in_b = 0; in_gidx = 0; in_table = 0; in_tag = 0;
    for (int i = 0; i < N; i++) begin
      logic [127:0] tg, te;
      a0[i] = {$urandom, $urandom, $urandom, $urandom};
      b0[i] = {$urandom, $urandom, $urandom, $urandom};
      c0[i] = garble_and(a0[i], b0[i], r_delta, i, tg, te);
      tb[i] = '{tg: tg, te: te};
      xa[i] = 1'($urandom); xb[i] = 1'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    n_out = 0;
    for (int i = 0; i < N; i++) drive(i, a0[i], b0[i], '0);
    in_valid <= 0;
    repeat (40) @(posedge clk);
    if (n_out != N) begin failures++; $display("garble: %0d outputs", n_out); end
    // switch to evaluation
    mode = MODE_EVAL;
    n_out = 0;
    for (int i = 0; i < N; i++)
      drive(i, a0[i] ^ (xa[i] ? r_delta : '0), b0[i] ^ (xb[i] ? r_delta : '0), tb[i]);
    in_valid <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != N) begin failures++; $display("eval: %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
