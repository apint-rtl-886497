// apint_core: one core of the accelerator, the four-stage runtime pipeline.
//
// A core owns a Wire Memory, a Table Memory, an OoRW Prefetch Buffer and a PE,
// and executes the broadcast instruction stream in order:
//
//  1. Write Address Preemption and Read check (issue). The instruction may
//     issue only when both read addresses are readable: an address whose
//     BlockBit is set is waiting either for an OoRW transfer (OoRBit set) or
//     for a PE result, and the core stalls until the transfer or the
//     write-back arrives; a value written in the issue cycle itself is taken
//     from the forwarding path. On issue the BlockBit of the write address is
//     set (unless WEN = 1), the reads start, and for each set OoRW-fetch bit
//     the corresponding read address is reserved (BlockBit and OoRBit set)
//     for the next OoRW in the Prefetch Buffer.
//  2. Read: three cycles (READ_LAT) from issue to the PE input.
//  3. OoRW Transfer and PE Execution: pending transfers move the head of the
//     Prefetch Buffer into Wire Memory and clear both flags when done; the PE
//     runs FreeXOR (1 cycle) or Half-Gate (18/21 cycles) by the OP bit.
//  4. Write: two cycles; the label goes to Wire Memory unless WEN = 1
//     (clearing the BlockBit) and to DRAM when LIVE = 1.
//
// Issue also waits for a garbled table when evaluating an AND gate, for a free
// write-back slot (FreeXOR and Half-Gate results must not finish in the same
// cycle), for room in the transfer queue, and for a write address that no
// earlier instruction still holds. These interlocks, the one-cycle issue
// stage and the WEN = 1 rule (such an instruction preempts nothing, because
// its write address belongs to an OoRW transfer) are this design's choices;
// the stage order, the flag meanings, the stall causes and the latencies are
// the paper's. core_ready is combinational from the broadcast instruction;
// the accelerator issues to all cores together with the issue input.
// Live labels leave on wire_out_* with the sequence number of the producing
// instruction, and garbled tables (garbling only) on table_out_* with the
// sequence number of the AND gate, so DRAM addresses follow from them.
module apint_core
  import apint_pkg::*;
#(
  parameter int unsigned  WM_DEPTH   = 8192,
  parameter int unsigned  TM_DEPTH   = 64,
  parameter int unsigned  PB_DEPTH   = 64,
  parameter int unsigned  XQ_DEPTH   = 4,
  parameter int unsigned  READ_LAT   = 3,
  parameter int unsigned  WRITE_LAT  = 2,
  parameter int unsigned  EVAL_LAT   = 18,
  parameter int unsigned  GARBLE_LAT = 21,
  parameter logic [127:0] AES_KEY    = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  label_t      r_delta,
  // broadcast instruction
  input  logic        instr_valid,
  input  instr_t      instr,
  output logic        core_ready,
  input  logic        issue,
  // initial load of input wires (only while idle)
  input  logic        load_valid,
  input  waddr_t      load_addr,
  input  label_t      load_data,
  // DRAM -> core
  input  logic        oorw_in_valid,
  input  label_t      oorw_in_data,
  output logic        oorw_in_ready,
  input  logic        table_in_valid,
  input  gtable_t     table_in_data,
  output logic        table_in_ready,
  // core -> DRAM
  output logic        wire_out_valid,
  output label_t      wire_out_data,
  output logic [31:0] wire_out_seq,
  output logic        table_out_valid,
  output gtable_t     table_out_data,
  output logic [31:0] table_out_seq,
  // status
  output logic        busy,
  output logic        stall_fwd,    // waiting for a PE result (forwarding)
  output logic        stall_oor,    // waiting for an OoRW transfer
  output logic        stall_table,  // waiting for a garbled table
  output logic        stall_slot,   // write-back slot taken
  output logic        stall_waw     // write address still held / queue full
);
  localparam int unsigned RESV_W = READ_LAT + GARBLE_LAT + 1;
  localparam int unsigned XQ_AW  = $clog2(XQ_DEPTH);

  typedef struct packed {
    waddr_t      wr_addr;
    logic        wen;
    logic        live;
    logic [31:0] seq;
  } tag_t;
  localparam int unsigned TAG_W = $bits(tag_t);

  // ---------------------------------------------------------------- memories
  label_t rd_data0, rd_data1;
  logic   q_block0, q_oor0, q_block1, q_oor1, q_block_wr;
  logic   pre_valid, mark_valid0, mark_valid1;
  logic   wb_valid, xf_valid;
  waddr_t wb_addr, xf_addr;
  label_t wb_data, xf_data;

  wire_memory #(.DEPTH(WM_DEPTH)) u_wm (
    .clk, .rst_n,
    .rd_en(issue), .rd_addr0(instr.rd_addr0), .rd_addr1(instr.rd_addr1),
    .rd_data0, .rd_data1,
    .q_wr_addr(instr.wr_addr),
    .q_block0, .q_oor0, .q_block1, .q_oor1, .q_block_wr,
    .pre_valid, .pre_addr(instr.wr_addr),
    .mark_valid0, .mark_addr0(instr.rd_addr0),
    .mark_valid1, .mark_addr1(instr.rd_addr1),
    .wb_valid, .wb_addr, .wb_data,
    .xf_valid, .xf_addr, .xf_data
  );

  gtable_t tm_head;
  logic    tm_empty, tm_pop;
  table_memory #(.DEPTH(TM_DEPTH)) u_tm (
    .clk, .rst_n,
    .wr_valid(table_in_valid), .wr_data(table_in_data), .wr_ready(table_in_ready),
    .rd_en(tm_pop), .rd_data(tm_head), .empty(tm_empty)
  );

  label_t pb_head;
  logic   pb_empty, pb_pop;
  oorw_prefetch_buffer #(.DEPTH(PB_DEPTH)) u_pb (
    .clk, .rst_n,
    .push_valid(oorw_in_valid), .push_data(oorw_in_data), .push_ready(oorw_in_ready),
    .pop(pb_pop), .head(pb_head), .empty(pb_empty)
  );

  // ------------------------------------------------ OoRW transfer queue
  waddr_t          xq [XQ_DEPTH];
  logic [XQ_AW:0]  xq_count;
  logic            xq_empty, xf_fire;
  assign xq_empty = xq_count == '0;
  assign xf_fire  = !xq_empty && !pb_empty && !load_valid;
  assign pb_pop   = xf_fire;
  assign xf_valid = xf_fire || load_valid;
  assign xf_addr  = load_valid ? load_addr : xq[0];
  assign xf_data  = load_valid ? load_data : pb_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xq_count <= '0;
    end else begin
      // shift out the head, then append the new reservations in order
      automatic waddr_t         q [XQ_DEPTH] = xq;
      automatic logic [XQ_AW:0] n = xq_count;
      if (xf_fire) begin
        for (int i = 0; i < XQ_DEPTH - 1; i++) q[i] = q[i+1];
        n = n - 1'b1;
      end
      if (mark_valid0) begin q[n[XQ_AW-1:0]] = instr.rd_addr0; n = n + 1'b1; end
      if (mark_valid1) begin q[n[XQ_AW-1:0]] = instr.rd_addr1; n = n + 1'b1; end
      xq       <= q;
      xq_count <= n;
    end
  end

  // ---------------------------------------------------------- issue checks
  logic fwd_wb0, fwd_xf0, fwd_wb1, fwd_xf1;
  logic ok0, ok1, ok_wr, ok_tbl, ok_slot, ok_xq;
  logic need_tbl;
  int unsigned pe_lat, slot;
  logic [1:0]       n_fetch;
  logic [RESV_W-1:0] resv;

  always_comb begin
    fwd_wb0 = wb_valid && wb_addr == instr.rd_addr0;
    fwd_wb1 = wb_valid && wb_addr == instr.rd_addr1;
    fwd_xf0 = xf_valid && xf_addr == instr.rd_addr0;
    fwd_xf1 = xf_valid && xf_addr == instr.rd_addr1;
    ok0     = !q_block0 || (q_oor0 ? fwd_xf0 : fwd_wb0);
    ok1     = !q_block1 || (q_oor1 ? fwd_xf1 : fwd_wb1);
    ok_wr   = instr.wen || !q_block_wr;
    need_tbl = instr.op == OP_AND && mode == MODE_EVAL;
    ok_tbl  = !need_tbl || !tm_empty;
    pe_lat  = instr.op == OP_XOR ? 1 : (mode == MODE_GARBLE ? GARBLE_LAT : EVAL_LAT);
    slot    = READ_LAT + pe_lat;
    ok_slot = !resv[slot];
    n_fetch = 2'(instr.oorw_fetch[0]) + 2'(instr.oorw_fetch[1]);
    ok_xq   = (XQ_AW+1)'(n_fetch) + xq_count <= (XQ_AW+1)'(XQ_DEPTH);
    core_ready = ok0 && ok1 && ok_wr && ok_tbl && ok_slot && ok_xq;

    stall_oor   = instr_valid && ((!ok0 && q_oor0) || (!ok1 && q_oor1));
    stall_fwd   = instr_valid && ((!ok0 && !q_oor0) || (!ok1 && !q_oor1));
    stall_table = instr_valid && !ok_tbl;
    stall_slot  = instr_valid && !ok_slot;
    stall_waw   = instr_valid && (!ok_wr || !ok_xq);
  end

  assign pre_valid   = issue && !instr.wen;
  assign mark_valid0 = issue && instr.oorw_fetch[0];
  assign mark_valid1 = issue && instr.oorw_fetch[1];
  assign tm_pop      = issue && need_tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) resv <= '0;
    else        resv <= (resv >> 1) | (issue ? (RESV_W'(1) << (slot - 1)) : '0);
  end

  // ------------------------------------------------------- read pipeline
  typedef struct packed {
    op_e          op;
    logic         sel0, sel1;   // 0: memory read, 1: forwarded value
    label_t       fwd0, fwd1;
    gtable_t      tbl;
    logic [GIDX_W-1:0] gidx;
    tag_t         tag;
  } rstage_t;

  typedef struct packed {
    logic         valid;
    op_e          op;
    label_t       a, b;
    gtable_t      tbl;
    logic [GIDX_W-1:0] gidx;
    tag_t         tag;
  } opnd_t;

  logic [GIDX_W-1:0] gidx_cnt;
  logic [31:0]       seq_cnt;
  logic              r1_valid;
  rstage_t           r1;
  opnd_t             rp [READ_LAT-1];   // stages 2..READ_LAT

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gidx_cnt <= '0;
      seq_cnt  <= '0;
      r1_valid <= 1'b0;
    end else begin
      r1_valid <= issue;
      if (issue) begin
        seq_cnt <= seq_cnt + 1;
        if (instr.op == OP_AND) gidx_cnt <= gidx_cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    r1.op   <= instr.op;
    r1.sel0 <= q_block0;
    r1.sel1 <= q_block1;
    r1.fwd0 <= q_oor0 ? xf_data : wb_data;
    r1.fwd1 <= q_oor1 ? xf_data : wb_data;
    r1.tbl  <= tm_head;
    r1.gidx <= gidx_cnt;
    r1.tag  <= '{wr_addr: instr.wr_addr, wen: instr.wen, live: instr.live, seq: seq_cnt};
  end

  opnd_t r1_res;
  always_comb begin
    r1_res.valid = r1_valid;
    r1_res.op    = r1.op;
    r1_res.a     = r1.sel0 ? r1.fwd0 : rd_data0;
    r1_res.b     = r1.sel1 ? r1.fwd1 : rd_data1;
    r1_res.tbl   = r1.tbl;
    r1_res.gidx  = r1.gidx;
    r1_res.tag   = r1.tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < READ_LAT - 1; i++) rp[i] <= '0;
    end else begin
      rp[0] <= r1_res;
      for (int i = 1; i < READ_LAT - 1; i++) rp[i] <= rp[i-1];
    end
  end

  // ------------------------------------------------------------------ PE
  opnd_t  pin;
  logic   pe_valid, pe_tvalid;
  label_t pe_label;
  tag_t   pe_tag;
  gtable_t pe_table;
  assign pin = rp[READ_LAT-2];

  pe #(.EVAL_LAT(EVAL_LAT), .GARBLE_LAT(GARBLE_LAT), .TAG_W(TAG_W), .AES_KEY(AES_KEY)) u_pe (
    .clk, .rst_n, .mode, .r_delta,
    .in_valid(pin.valid), .in_op(pin.op), .in_a(pin.a), .in_b(pin.b),
    .in_gidx(pin.gidx), .in_table(pin.tbl), .in_tag(pin.tag),
    .out_valid(pe_valid), .out_label(pe_label), .out_tag(pe_tag),
    .tbl_valid(pe_tvalid), .tbl_data(pe_table)
  );

  assign table_out_valid = pe_tvalid;
  assign table_out_data  = pe_table;
  assign table_out_seq   = pe_tag.seq;

  // --------------------------------------------------------------- write
  typedef struct packed {
    logic   valid;
    label_t lbl;
    tag_t   tag;
  } wstage_t;
  wstage_t ws [WRITE_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WRITE_LAT; i++) ws[i] <= '0;
    end else begin
      ws[0] <= '{valid: pe_valid, lbl: pe_label, tag: pe_tag};
      for (int i = 1; i < WRITE_LAT; i++) ws[i] <= ws[i-1];
    end
  end

  wstage_t wl;
  assign wl             = ws[WRITE_LAT-1];
  assign wb_valid       = wl.valid && !wl.tag.wen;
  assign wb_addr        = wl.tag.wr_addr;
  assign wb_data        = wl.lbl;
  assign wire_out_valid = wl.valid && wl.tag.live;
  assign wire_out_data  = wl.lbl;
  assign wire_out_seq   = wl.tag.seq;

  always_comb begin
    busy = |resv || !xq_empty || r1_valid;
    for (int i = 0; i < READ_LAT - 1; i++) busy |= rp[i].valid;
    for (int i = 0; i < WRITE_LAT; i++)    busy |= ws[i].valid;
  end

  a_issue_ready: assert property (@(posedge clk) disable iff (!rst_n) issue |-> core_ready && instr_valid)
    else $error("apint_core: issued while not ready");
endmodule
