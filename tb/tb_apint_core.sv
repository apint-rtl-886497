// tb_apint_core: one core runs random programs in both modes and is compared
// with the sequential reference interpreter.
//
// Garbling phase: a random 400-instruction program over 24 wire addresses,
// with AND and XOR gates, OoRW fetches, WEN = 1 instructions and LIVE outputs,
// runs on random 0-labels. Every live label and every garbled table must
// equal the reference. Evaluation phase: random plaintext bits select the
// active input labels, the tables from the garbling phase are streamed in with
// random gaps, and every live label must equal the reference evaluation and
// also the garbled 0-label XOR (bit ? R : 0) for the plaintext result bit of
// that wire. OoRWs also arrive with random gaps. A final phase measures the
// issue-to-DRAM latency of a lone FreeXOR (3 + 1 + 2 = 6 cycles) and a lone
// evaluated AND (3 + 18 + 2 = 23 cycles). Each stall cause must occur.
module tb_apint_core;
  import apint_pkg::*;
  import gc_ref_pkg::*;

  localparam int NPROG = 400, NADDR = 24, WM = 8192;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  mode_e   mode;
  label_t  r_delta;
  logic    instr_valid, core_ready, issue;
  instr_t  instr;
  logic    load_valid;
  waddr_t  load_addr;
  label_t  load_data;
  logic    oorw_in_valid, oorw_in_ready, table_in_valid, table_in_ready;
  label_t  oorw_in_data;
  gtable_t table_in_data;
  logic    wire_out_valid, table_out_valid;
  label_t  wire_out_data;
  gtable_t table_out_data;
  logic [31:0] wire_out_seq, table_out_seq;
  logic    busy, stall_fwd, stall_oor, stall_table, stall_slot, stall_waw;

  apint_core dut (.*);

  int checks = 0, failures = 0;
  int n_fwd = 0, n_oor = 0, n_table = 0, n_slot = 0, n_waw = 0, n_xfer = 0;

  instr_t       prog [$];
  label_t       got_wire [int];
  gtable_t      got_tbl [int];
  int           t_issue [int];
  int           t_out [int];
  label_t       oorw_q [$];
  gtable_t      tbl_q [$];
  int           gap_pct, oorw_gap_pct;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue logic of the accelerator, for one core
  int pc;
  assign instr_valid = pc < prog.size();
  assign instr       = instr_valid ? prog[pc] : '0;
  assign issue       = instr_valid && core_ready;

  always @(posedge clk) begin
    if (rst_n) begin
      if (issue) t_issue[pc] = int'($time / 10);
      if (issue) pc <= pc + 1;
      if (wire_out_valid) begin
        got_wire[int'(wire_out_seq)] = wire_out_data;
        t_out[int'(wire_out_seq)] = int'($time / 10);
      end
      if (table_out_valid) got_tbl[int'(table_out_seq)] = table_out_data;
      n_fwd   += int'(stall_fwd);
      n_oor   += int'(stall_oor);
      n_table += int'(stall_table);
      n_slot  += int'(stall_slot);
      n_waw   += int'(stall_waw);
      n_xfer  += int'(dut.xf_fire);
    end
  end

  // DRAM-side feeders with random gaps
  always @(posedge clk) begin
    if (oorw_in_valid && oorw_in_ready) void'(oorw_q.pop_front());
    if (table_in_valid && table_in_ready) void'(tbl_q.pop_front());
    oorw_in_valid  <= 1'b0;
    table_in_valid <= 1'b0;
    if (oorw_q.size() > 0 && $urandom_range(99) >= oorw_gap_pct) begin
      oorw_in_valid <= 1'b1;
      oorw_in_data  <= oorw_q[0];
    end
    if (tbl_q.size() > 0 && $urandom_range(99) >= gap_pct) begin
      table_in_valid <= 1'b1;
      table_in_data  <= tbl_q[0];
    end
  end

  task automatic start(mode_e m, label_t init [], label_t oorws [$], gtable_t tbls [$]);
    mode = m;
    pc = prog.size();  // hold issue while loading
    got_wire.delete(); got_tbl.delete(); t_issue.delete(); t_out.delete();
    oorw_q.delete(); tbl_q.delete();
    rst_n = 0;
    @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (init[a]) begin
      load_valid <= 1; load_addr <= waddr_t'(a); load_data <= init[a];
      @(posedge clk);
    end
    load_valid <= 0;
    @(posedge clk);
    oorw_q = oorws;
    tbl_q  = tbls;
    pc = 0;
    @(posedge clk);
    while (pc < prog.size() || busy) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  initial begin
    gc_machine gm, em;
    label_t init0 [], inita [];
    label_t oorw0 [$], oorwa [$];
    gtable_t tbls [$];
    bit bmem [], bo [$], bout [];
    int nf, nlive;

    load_valid = 0; load_addr = 0; load_data = 0; pc = 0; gap_pct = 30; oorw_gap_pct = 97;
    oorw_in_valid = 0; table_in_valid = 0; oorw_in_data = 0; table_in_data = 0;
    r_delta = {$urandom, $urandom, $urandom, $urandom} | 128'h1;
    #1 rst_n = 0;
    #20 rst_n = 1;

    nf = gen_prog(prog, NPROG, NADDR, 40, 12, 6);
    init0 = new[NADDR];
    foreach (init0[a]) init0[a] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < nf; i++) oorw0.push_back({$urandom, $urandom, $urandom, $urandom});

    // ---------------- garbling
    gm = new(WM);
    foreach (init0[a]) gm.mem[a] = init0[a];
    gm.oorw = oorw0;
    gm.run(prog, MODE_GARBLE, r_delta);
    start(MODE_GARBLE, init0, oorw0, tbls);
    nlive = 0;
    foreach (prog[i]) begin
      if (prog[i].live) begin
        nlive++;
        check(got_wire.exists(i) && got_wire[i] === gm.out[i], $sformatf("garble live %0d", i));
      end
      if (gm.is_and[i]) begin
        check(got_tbl.exists(i) && got_tbl[i] === gtable_t'(gm.tbl_out[i]),
              $sformatf("garble table %0d", i));
        tbls.push_back(gtable_t'(gm.tbl_out[i]));
      end
    end
    check(got_wire.size() == nlive, "garble live count");

    // ---------------- evaluation
    bmem = new[WM];
    inita = new[NADDR];
    foreach (inita[a]) begin
      bmem[a]  = 1'($urandom);
      inita[a] = init0[a] ^ (bmem[a] ? r_delta : '0);
    end
    foreach (oorw0[k]) begin
      bo.push_back(1'($urandom));
      oorwa.push_back(oorw0[k] ^ (bo[k] ? r_delta : '0));
    end
    run_bits(prog, bmem, bo, bout);
    em = new(WM);
    foreach (inita[a]) em.mem[a] = inita[a];
    em.oorw = oorwa;
    foreach (tbls[k]) em.tbl_in.push_back(tbls[k]);
    em.run(prog, MODE_EVAL, r_delta);
    start(MODE_EVAL, inita, oorwa, tbls);
    foreach (prog[i]) if (prog[i].live) begin
      check(got_wire.exists(i) && got_wire[i] === em.out[i], $sformatf("eval live %0d", i));
      check(got_wire.exists(i) && got_wire[i] === (gm.out[i] ^ (bout[i] ? r_delta : '0)),
            $sformatf("eval decodes wrong %0d", i));
    end

    // ---------------- latency of lone gates
    begin
      instr_t x;
      label_t one [];
      gtable_t t1 [$];
      one = new[2];
      one[0] = 1; one[1] = 2;
      x = '{rd_addr0: 0, rd_addr1: 1, oorw_fetch: 0, wr_addr: 5, wen: 0, op: OP_XOR, live: 1};
      prog.delete(); prog.push_back(x);
      start(MODE_EVAL, one, '{}, '{});
      check(t_out.exists(0) && t_out[0] - t_issue[0] == 6,
            $sformatf("FreeXOR latency %0d", t_out[0] - t_issue[0]));
      check(got_wire[0] === 128'h3, "FreeXOR value");
      x.op = OP_AND;
      prog.delete(); prog.push_back(x);
      t1.push_back('0);
      start(MODE_EVAL, one, '{}, t1);
      check(t_out.exists(0) && t_out[0] - t_issue[0] == 23,
            $sformatf("Half-Gate latency %0d", t_out[0] - t_issue[0]));
    end

    $display("stall cycles: fwd=%0d oor=%0d table=%0d slot=%0d waw=%0d; transfers=%0d",
             n_fwd, n_oor, n_table, n_slot, n_waw, n_xfer);
    check(n_fwd > 0,   "forwarding stall never happened");
    check(n_oor > 0,   "OoRW stall never happened");
    check(n_table > 0, "table stall never happened");
    check(n_slot > 0,  "write-back slot stall never happened");
    check(n_xfer >= 2*nf, "OoRW transfers missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

