// oorw_prefetch_buffer: one core's OoRW Prefetch Buffer.
//
// Out-of-range wires (OoRWs) are labels that no longer fit in Wire Memory and
// were spilled to DRAM. The compiler lists them in the order the program will
// need them, so DRAM streams them into this buffer ahead of use, and the core
// moves the head entry into Wire Memory when an instruction's OoRW-fetch bit
// asks for it; from then on it can be read any number of times. The paper's
// 1KB holds DEPTH = 64 labels of 128 bits. Writing is a valid/ready
// handshake; the head is visible while !empty and pop removes it. Push and
// pop may share a cycle. The FIFO organisation is this design's choice.
module oorw_prefetch_buffer
  import apint_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  input  label_t push_data,
  output logic   push_ready,
  input  logic   pop,
  output label_t head,
  output logic   empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  label_t         mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    count;
  logic           do_push, do_pop;

  assign push_ready = count < (AW+1)'(DEPTH);
  assign empty      = count == '0;
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop && !empty;
  assign head       = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("oorw_prefetch_buffer: pop while empty");
endmodule
