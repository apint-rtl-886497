// tb_apint_accel: end-to-end test of the whole accelerator at its default
// size (16 cores, 8192-label Wire Memories, 2978-entry Instruction Memory).
//
// As under coarse-grained scheduling, all cores run one random program (300
// instructions over 24 wire addresses: AND and XOR gates, OoRW fetches, WEN
// and LIVE bits), each on its own data. The program is streamed into the
// Instruction Memory while the cores run. The test garbles, switches mode,
// then evaluates with random plaintext inputs and the garbled tables, and
// checks every live label and table of every core against the sequential
// reference model, and that each evaluated label decodes to the plaintext
// result. OoRWs and tables arrive with random gaps per core. It counts how
// often each mechanism happened (forwarding stall, OoRW stall, table stall,
// write-back slot stall, write-address stall, OoRW transfer, WEN no-write,
// LIVE write-out, mode switch) and fails a mechanism that never happened.
module tb_apint_accel;
  import apint_pkg::*;
  import gc_ref_pkg::*;

  localparam int NC = 16, NPROG = 300, NADDR = 24, WM = 8192;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  mode_e   mode;
  label_t  r_delta;
  logic    imem_wr_valid, imem_wr_ready;
  instr_t  imem_wr_data;
  logic    load_valid [NC];
  waddr_t  load_addr [NC];
  label_t  load_data [NC];
  logic    oorw_in_valid [NC], oorw_in_ready [NC];
  label_t  oorw_in_data [NC];
  logic    table_in_valid [NC], table_in_ready [NC];
  gtable_t table_in_data [NC];
  logic    wire_out_valid [NC], table_out_valid [NC];
  label_t  wire_out_data [NC];
  gtable_t table_out_data [NC];
  logic [31:0] wire_out_seq [NC], table_out_seq [NC];
  logic    issue, busy, stall_fwd, stall_oor, stall_table, stall_slot, stall_waw;

  apint_accel dut (.*);

  int checks = 0, failures = 0;
  int n_fwd = 0, n_oor = 0, n_table = 0, n_slot = 0, n_waw = 0;
  int n_xfer = 0, n_wen = 0, n_live = 0, n_mode = 0, n_issue = 0;

  instr_t  prog [$];
  int      feed_pc;
  label_t  got_wire [NC][int];
  gtable_t got_tbl [NC][int];
  label_t  oorw_q [NC][$];
  gtable_t tbl_q [NC][$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction stream from DRAM, with gaps
  always @(posedge clk) begin
    if (imem_wr_valid && imem_wr_ready) feed_pc = feed_pc + 1;
    imem_wr_valid <= 1'b0;
    if (feed_pc < prog.size() && $urandom_range(99) < 60) begin
      imem_wr_valid <= 1'b1;
      imem_wr_data  <= prog[feed_pc];
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_io
    always @(posedge clk) begin
      if (oorw_in_valid[c] && oorw_in_ready[c]) void'(oorw_q[c].pop_front());
      if (table_in_valid[c] && table_in_ready[c]) void'(tbl_q[c].pop_front());
      oorw_in_valid[c]  <= 1'b0;
      table_in_valid[c] <= 1'b0;
      if (oorw_q[c].size() > 0 && $urandom_range(99) >= 97) begin
        oorw_in_valid[c] <= 1'b1;
        oorw_in_data[c]  <= oorw_q[c][0];
      end
      if (tbl_q[c].size() > 0 && $urandom_range(99) >= 92) begin
        table_in_valid[c] <= 1'b1;
        table_in_data[c]  <= tbl_q[c][0];
      end
      if (rst_n && wire_out_valid[c]) got_wire[c][int'(wire_out_seq[c])] = wire_out_data[c];
      if (rst_n && table_out_valid[c]) got_tbl[c][int'(table_out_seq[c])] = table_out_data[c];
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_fwd   += int'(stall_fwd);
    n_oor   += int'(stall_oor);
    n_table += int'(stall_table);
    n_slot  += int'(stall_slot);
    n_waw   += int'(stall_waw);
    n_issue += int'(issue);
    n_xfer  += int'(dut.g_core[0].u_core.xf_fire);
    n_live  += int'(wire_out_valid[0]);
    n_wen   += int'(issue && dut.head.wen);
  end

  task automatic run(mode_e m, label_t init [NC][], label_t oorws [NC][$], gtable_t tbls [NC][$]);
    if (m != mode) n_mode++;
    mode = m;
    feed_pc = prog.size();
    for (int c = 0; c < NC; c++) begin
      got_wire[c].delete(); got_tbl[c].delete();
      oorw_q[c].delete(); tbl_q[c].delete();
    end
    rst_n = 0;
    @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int a = 0; a < NADDR; a++) begin
      for (int c = 0; c < NC; c++) begin
        load_valid[c] <= 1; load_addr[c] <= waddr_t'(a); load_data[c] <= init[c][a];
      end
      @(posedge clk);
    end
    for (int c = 0; c < NC; c++) load_valid[c] <= 0;
    @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      oorw_q[c] = oorws[c];
      tbl_q[c]  = tbls[c];
    end
    feed_pc = 0;
    repeat (2) @(posedge clk);
    while (feed_pc < prog.size() || busy) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  initial begin
    gc_machine gm [NC];
    label_t init0 [NC][], inita [NC][];
    label_t oorw0 [NC][$], oorwa [NC][$];
    gtable_t tbls [NC][$], none [NC][$];
    int nf, nlive;
    int t0, t1;

    mode = MODE_GARBLE; feed_pc = 0;
    imem_wr_valid = 0; imem_wr_data = '0;
    for (int c = 0; c < NC; c++) begin
      load_valid[c] = 0; load_addr[c] = 0; load_data[c] = 0;
      oorw_in_valid[c] = 0; oorw_in_data[c] = 0;
      table_in_valid[c] = 0; table_in_data[c] = 0;
    end
    r_delta = {$urandom, $urandom, $urandom, $urandom} | 128'h1;
    #1 rst_n = 0;
    #20 rst_n = 1;

    nf = gen_prog(prog, NPROG, NADDR, 40, 12, 6);
    for (int c = 0; c < NC; c++) begin
      init0[c] = new[NADDR];
      foreach (init0[c][a]) init0[c][a] = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < nf; i++) oorw0[c].push_back({$urandom, $urandom, $urandom, $urandom});
    end

    // ---------------- garbling
    t0 = int'($time / 10);
    run(MODE_GARBLE, init0, oorw0, none);
    t1 = int'($time / 10);
    $display("garbling: %0d instructions on %0d cores in %0d cycles", NPROG, NC, t1 - t0);
    for (int c = 0; c < NC; c++) begin
      gm[c] = new(WM);
      foreach (init0[c][a]) gm[c].mem[a] = init0[c][a];
      gm[c].oorw = oorw0[c];
      gm[c].run(prog, MODE_GARBLE, r_delta);
      nlive = 0;
      foreach (prog[i]) begin
        if (prog[i].live) begin
          nlive++;
          check(got_wire[c].exists(i) && got_wire[c][i] === gm[c].out[i],
                $sformatf("core %0d garble live %0d", c, i));
        end
        if (gm[c].is_and[i]) begin
          check(got_tbl[c].exists(i) && got_tbl[c][i] === gtable_t'(gm[c].tbl_out[i]),
                $sformatf("core %0d garble table %0d", c, i));
          tbls[c].push_back(gtable_t'(gm[c].tbl_out[i]));
        end
      end
      check(got_wire[c].size() == nlive, "garble live count");
    end

    // ---------------- evaluation
    begin
      bit bmem [NC][], bo [NC][$], bout [NC][];
      for (int c = 0; c < NC; c++) begin
        bmem[c]  = new[WM];
        inita[c] = new[NADDR];
        foreach (inita[c][a]) begin
          bmem[c][a]  = 1'($urandom);
          inita[c][a] = init0[c][a] ^ (bmem[c][a] ? r_delta : '0);
        end
        foreach (oorw0[c][k]) begin
          bo[c].push_back(1'($urandom));
          oorwa[c].push_back(oorw0[c][k] ^ (bo[c][k] ? r_delta : '0));
        end
        run_bits(prog, bmem[c], bo[c], bout[c]);
      end
      t0 = int'($time / 10);
      run(MODE_EVAL, inita, oorwa, tbls);
      t1 = int'($time / 10);
      $display("evaluation: %0d instructions on %0d cores in %0d cycles", NPROG, NC, t1 - t0);
      for (int c = 0; c < NC; c++)
        foreach (prog[i]) if (prog[i].live)
          check(got_wire[c].exists(i) && got_wire[c][i] === (gm[c].out[i] ^ (bout[c][i] ? r_delta : '0)),
                $sformatf("core %0d eval label %0d does not decode", c, i));
    end

    $display("events: fwd=%0d oor=%0d table=%0d slot=%0d waw=%0d stall cycles; transfers=%0d wen=%0d live=%0d mode switches=%0d issues=%0d",
             n_fwd, n_oor, n_table, n_slot, n_waw, n_xfer, n_wen, n_live, n_mode, n_issue);
    check(n_fwd > 0,   "forwarding stall never happened");
    check(n_oor > 0,   "OoRW stall never happened");
    check(n_table > 0, "table stall never happened");
    check(n_slot > 0,  "write-back slot stall never happened");
    check(n_waw > 0,   "write-address stall never happened");
    check(n_xfer == 2*nf, "OoRW transfer count");
    check(n_wen > 0,   "WEN no-write never happened");
    check(n_live > 0,  "LIVE write-out never happened");
    check(n_mode > 0,  "mode switch never happened");
    check(n_issue == 2*NPROG, "issue count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
