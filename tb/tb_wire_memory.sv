// tb_wire_memory: random reads, preemptions, OoRW reservations, write-backs
// and transfers on a small address range, against a model of the labels and
// of the BlockBit and OoRBit flags. Checks the combinational flag lookups
// every cycle, read data one cycle after a read, that a write-back clears
// only the BlockBit, that a transfer clears both flags, and that a set wins
// over a clear of the same address in the same cycle.
module tb_wire_memory;
  import apint_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic   rd_en, pre_valid, mark_valid0, mark_valid1, wb_valid, xf_valid;
  waddr_t rd_addr0, rd_addr1, q_wr_addr, pre_addr, mark_addr0, mark_addr1, wb_addr, xf_addr;
  label_t rd_data0, rd_data1, wb_data, xf_data;
  logic   q_block0, q_oor0, q_block1, q_oor1, q_block_wr;

  wire_memory dut (.*);

  localparam int NA = 16;
  label_t m_mem [NA];
  bit     m_blk [NA], m_oor [NA];
  int checks = 0, failures = 0, n_setclr = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic waddr_t ra();
    return waddr_t'($urandom_range(NA-1));
  endfunction

  initial begin
    label_t e0, e1;
    bit     rd_prev;
    rd_en = 0; pre_valid = 0; mark_valid0 = 0; mark_valid1 = 0; wb_valid = 0; xf_valid = 0;
    rd_addr0 = 0; rd_addr1 = 0; q_wr_addr = 0; pre_addr = 0; mark_addr0 = 0; mark_addr1 = 0;
    wb_addr = 0; xf_addr = 0; wb_data = 0; xf_data = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    // initial contents through the transfer port
    for (int a = 0; a < NA; a++) begin
      @(negedge clk);
      xf_valid = 1; xf_addr = waddr_t'(a); xf_data = {$urandom, $urandom, $urandom, $urandom};
      m_mem[a] = xf_data; m_blk[a] = 0; m_oor[a] = 0;
    end
    rd_prev = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (rd_prev) begin
        checks++;
        if (rd_data0 !== e0 || rd_data1 !== e1) begin failures++; $display("read data wrong %0d", i); end
      end
      rd_en = $urandom_range(1); rd_addr0 = ra(); rd_addr1 = ra(); q_wr_addr = ra();
      pre_valid = $urandom_range(3) == 0; pre_addr = ra();
      mark_valid0 = $urandom_range(7) == 0; mark_addr0 = ra();
      mark_valid1 = $urandom_range(7) == 0; mark_addr1 = ra();
      wb_valid = $urandom_range(2) == 0; wb_addr = ra();
      xf_valid = $urandom_range(2) == 0;
      do xf_addr = ra(); while (wb_valid && xf_addr == wb_addr);
      wb_data = {$urandom, $urandom, $urandom, $urandom};
      xf_data = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++;
      if (q_block0 !== m_blk[rd_addr0] || q_oor0 !== m_oor[rd_addr0] ||
          q_block1 !== m_blk[rd_addr1] || q_oor1 !== m_oor[rd_addr1] ||
          q_block_wr !== m_blk[q_wr_addr]) begin
        failures++; $display("flags wrong %0d", i);
      end
      e0 = m_mem[rd_addr0]; e1 = m_mem[rd_addr1]; rd_prev = rd_en;
      if ((pre_valid && ((wb_valid && pre_addr == wb_addr) || (xf_valid && pre_addr == xf_addr))) ||
          (mark_valid0 && xf_valid && mark_addr0 == xf_addr)) n_setclr++;
      // model update, clears first
      if (wb_valid) begin m_mem[wb_addr] = wb_data; m_blk[wb_addr] = 0; end
      if (xf_valid) begin m_mem[xf_addr] = xf_data; m_blk[xf_addr] = 0; m_oor[xf_addr] = 0; end
      if (pre_valid) m_blk[pre_addr] = 1;
      if (mark_valid0) begin m_blk[mark_addr0] = 1; m_oor[mark_addr0] = 1; end
      if (mark_valid1) begin m_blk[mark_addr1] = 1; m_oor[mark_addr1] = 1; end
    end
    checks++;
    if (n_setclr == 0) begin failures++; $display("set/clear collision never tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
