// table_memory: one core's Table Memory, a FIFO of garbled tables.
//
// When evaluating, the garbled tables of the AND gates arrive from DRAM in
// gate order (the compiler fixes their DRAM addresses ahead of time) and the
// core takes one per Half-Gate instruction at issue. Each entry holds both
// ciphertexts of a gate (256 bits); the paper's 2KB gives DEPTH = 64 entries.
// Writing is a valid/ready handshake; reading exposes the head (rd_data valid
// while !empty) and rd_en pops it. Reads and writes may happen in the same
// cycle. That the buffer is a FIFO is this design's choice: the paper gives
// only its size and purpose.
module table_memory
  import apint_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    wr_valid,
  input  gtable_t wr_data,
  output logic    wr_ready,
  input  logic    rd_en,
  output gtable_t rd_data,
  output logic    empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  gtable_t        mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    count;
  logic           do_wr, do_rd;

  assign wr_ready = count < (AW+1)'(DEPTH);
  assign empty    = count == '0;
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_en && !empty;
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("table_memory: read while empty");
endmodule
