// apint_accel: the garbled-circuit accelerator, NUM_CORES cores in lockstep.
//
// The accelerator runs Half-Gate garbling (client) or evaluation (server) of a
// netlist that the compiler has already scheduled and turned into
// instructions with Wire Memory addresses. Coarse-grained scheduling gives
// every core an independent copy of the same operation (one Softmax row, one
// GeLU element group, ...) so all cores execute the identical instruction
// stream, read from one shared Instruction Memory, and need no inter-core
// communication. An instruction issues to all cores in the same cycle, only
// when every core is ready; this keeps the cores synchronous, so their DRAM
// requests line up and can share the DRAM bus. Each core has its own Wire
// Memory, Table Memory, OoRW Prefetch Buffer and PE (see apint_core).
//
// Defaults are the paper's: 16 cores, 16KB Instruction Memory, 128KB Wire
// Memory, 2KB Table Memory and 1KB Prefetch Buffer per core, Half-Gate
// latency 18 (evaluate) / 21 (garble), FreeXOR 1, read 3 and write 2 cycles.
// The paper clocks memories at 2GHz and logic at 1GHz; here everything runs
// on one clock and the latencies are counted in that clock.
//
// DRAM is outside: its streams are ports. Instructions enter through
// imem_wr_*; per core, OoRWs and garbled tables enter through oorw_in_* and
// table_in_*, and live wires and (when garbling) garbled tables leave through
// wire_out_* and table_out_*, tagged with the instruction sequence number.
// Input wires are written into Wire Memory through load_* before a run.
// mode and r_delta must be held constant during a run; change mode only while
// busy is low (a reset then restarts the gate and sequence counters).
module apint_accel
  import apint_pkg::*;
#(
  parameter int unsigned  NUM_CORES   = 16,
  parameter int unsigned  IMEM_DEPTH  = (16*1024*8) / INSTR_W,
  parameter int unsigned  WM_DEPTH    = 8192,
  parameter int unsigned  TM_DEPTH    = 64,
  parameter int unsigned  PB_DEPTH    = 64,
  parameter int unsigned  EVAL_LAT    = 18,
  parameter int unsigned  GARBLE_LAT  = 21,
  parameter logic [127:0] AES_KEY     = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  label_t      r_delta,
  // instruction stream from DRAM
  input  logic        imem_wr_valid,
  input  instr_t      imem_wr_data,
  output logic        imem_wr_ready,
  // per-core ports
  input  logic        load_valid     [NUM_CORES],
  input  waddr_t      load_addr      [NUM_CORES],
  input  label_t      load_data      [NUM_CORES],
  input  logic        oorw_in_valid  [NUM_CORES],
  input  label_t      oorw_in_data   [NUM_CORES],
  output logic        oorw_in_ready  [NUM_CORES],
  input  logic        table_in_valid [NUM_CORES],
  input  gtable_t     table_in_data  [NUM_CORES],
  output logic        table_in_ready [NUM_CORES],
  output logic        wire_out_valid [NUM_CORES],
  output label_t      wire_out_data  [NUM_CORES],
  output logic [31:0] wire_out_seq   [NUM_CORES],
  output logic        table_out_valid[NUM_CORES],
  output gtable_t     table_out_data [NUM_CORES],
  output logic [31:0] table_out_seq  [NUM_CORES],
  // status
  output logic        issue,
  output logic        busy,
  output logic        stall_fwd,
  output logic        stall_oor,
  output logic        stall_table,
  output logic        stall_slot,
  output logic        stall_waw
);
  instr_t head;
  logic   empty;
  logic   all_ready;
  logic   core_ready [NUM_CORES];
  logic   c_busy [NUM_CORES], c_fwd [NUM_CORES], c_oor [NUM_CORES];
  logic   c_tbl [NUM_CORES], c_slot [NUM_CORES], c_waw [NUM_CORES];

  instruction_memory #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .rst_n,
    .wr_valid(imem_wr_valid), .wr_data(imem_wr_data), .wr_ready(imem_wr_ready),
    .pop(issue), .head, .empty
  );

  always_comb begin
    all_ready = 1'b1;
    busy = 1'b0; stall_fwd = 1'b0; stall_oor = 1'b0;
    stall_table = 1'b0; stall_slot = 1'b0; stall_waw = 1'b0;
    for (int c = 0; c < NUM_CORES; c++) begin
      all_ready   &= core_ready[c];
      busy        |= c_busy[c];
      stall_fwd   |= c_fwd[c];
      stall_oor   |= c_oor[c];
      stall_table |= c_tbl[c];
      stall_slot  |= c_slot[c];
      stall_waw   |= c_waw[c];
    end
    busy |= !empty;
  end
  assign issue = !empty && all_ready;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    apint_core #(
      .WM_DEPTH(WM_DEPTH), .TM_DEPTH(TM_DEPTH), .PB_DEPTH(PB_DEPTH),
      .EVAL_LAT(EVAL_LAT), .GARBLE_LAT(GARBLE_LAT), .AES_KEY(AES_KEY)
    ) u_core (
      .clk, .rst_n, .mode, .r_delta,
      .instr_valid(!empty), .instr(head), .core_ready(core_ready[c]), .issue,
      .load_valid(load_valid[c]), .load_addr(load_addr[c]), .load_data(load_data[c]),
      .oorw_in_valid(oorw_in_valid[c]), .oorw_in_data(oorw_in_data[c]),
      .oorw_in_ready(oorw_in_ready[c]),
      .table_in_valid(table_in_valid[c]), .table_in_data(table_in_data[c]),
      .table_in_ready(table_in_ready[c]),
      .wire_out_valid(wire_out_valid[c]), .wire_out_data(wire_out_data[c]),
      .wire_out_seq(wire_out_seq[c]),
      .table_out_valid(table_out_valid[c]), .table_out_data(table_out_data[c]),
      .table_out_seq(table_out_seq[c]),
      .busy(c_busy[c]), .stall_fwd(c_fwd[c]), .stall_oor(c_oor[c]),
      .stall_table(c_tbl[c]), .stall_slot(c_slot[c]), .stall_waw(c_waw[c])
    );
  end
endmodule
