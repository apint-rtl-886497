// tb_instruction_memory: random push/pop traffic against a queue model.
//
// Pushes and pops happen at random, including in the same cycle, until the
// buffer has been both full and empty several times. Every popped entry must
// match the model's, ready must drop exactly when DEPTH entries are held and
// empty must match the model's count. The buffer is parameterised down to 8
// entries so that full is reached quickly.
module tb_instruction_memory;
  import apint_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  localparam int D = 8;
  logic            wr_valid, wr_ready, pop, empty;
  logic [44-1:0]   wr_data, head;

  instruction_memory #(.DEPTH(D)) dut (.clk, .rst_n, .wr_valid, .wr_data(wr_data), .wr_ready, .pop, .head(head), .empty);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [44-1:0] model [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_data = 0; pop = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      // choose this cycle's actions on the falling edge
      wr_valid = $urandom_range(99) < ((i / 300) % 2 ? 75 : 30);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      pop = !empty && $urandom_range(99) < ((i / 300) % 2 ? 30 : 75);
      #1;
      checks++;
      if (wr_ready !== (model.size() < D) || empty !== (model.size() == 0)) begin
        failures++; $display("flags wrong at %0d: size %0d", i, model.size());
      end
      if (pop) begin
        checks++;
        if (head !== model[0]) begin failures++; $display("data wrong at %0d", i); end
      end
      if (model.size() == D) n_full++;
      if (model.size() == 0) n_empty++;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (wr_valid && model.size() + int'(pop) < D) model.push_back(wr_data);
      @(negedge clk);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
