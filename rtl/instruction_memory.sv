// instruction_memory: the unified Instruction Memory shared by all cores.
//
// Under coarse-grained scheduling every core runs the same instruction stream
// on its own independent data (for instance its own Softmax row), so one
// memory serves all of them and the same instruction is broadcast to every
// core. The memory is filled from DRAM while the program runs, so it works as
// a circular buffer: DRAM writes at the tail with a valid/ready handshake, the
// issue logic reads the head (valid while !empty) and pops it when all cores
// accept it. Default size: 16KB of 44-bit instructions, 2978 entries (the
// paper gives 16KB and the field widths; packing 44-bit words without padding
// is this design's choice).
module instruction_memory
  import apint_pkg::*;
#(
  parameter int unsigned DEPTH = (16*1024*8) / INSTR_W
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_valid,
  input  instr_t wr_data,
  output logic   wr_ready,
  input  logic   pop,
  output instr_t head,
  output logic   empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  instr_t         mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    count;
  logic           do_wr, do_pop;

  assign wr_ready = count < (AW+1)'(DEPTH);
  assign empty    = count == '0;
  assign do_wr    = wr_valid && wr_ready;
  assign do_pop   = pop && !empty;
  assign head     = mem[rp];

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr)  wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("instruction_memory: pop while empty");
endmodule
