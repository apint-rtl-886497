// aes128_pipe: fully pipelined AES-128 encryption under a fixed key.
//
// Garbling schemes with Half-Gates hash wire labels with AES under a fixed,
// public key, so the round keys are constants computed at elaboration. One
// block enters per cycle; stage 0 does the initial AddRoundKey and each of the
// ten rounds is one register stage, so the ciphertext appears LATENCY = 11
// cycles after the plaintext. A valid bit and an opaque tag travel alongside.
// The paper states only how many AES computations a Half-Gate needs; the
// one-round-per-stage organisation is this design's choice.
module aes128_pipe
  import aes_pkg::*;
#(
  parameter logic [127:0] KEY   = 128'h000102030405060708090a0b0c0d0e0f,
  parameter int unsigned  TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  block_t           in_block,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output block_t           out_block,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned LATENCY = 11;
  localparam logic [10:0][127:0] RK = expand_key(KEY);

  block_t           st  [LATENCY];
  logic             vld [LATENCY];
  logic [TAG_W-1:0] tag [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) vld[i] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int i = 1; i < LATENCY; i++) vld[i] <= vld[i-1];
    end
  end

  always_ff @(posedge clk) begin
    st[0]  <= in_block ^ RK[0];
    tag[0] <= in_tag;
    for (int r = 1; r < 10; r++) begin
      st[r]  <= mix_columns(sub_shift(st[r-1])) ^ RK[r];
      tag[r] <= tag[r-1];
    end
    st[10]  <= sub_shift(st[9]) ^ RK[10];
    tag[10] <= tag[9];
  end

  assign out_valid = vld[LATENCY-1];
  assign out_block = st[LATENCY-1];
  assign out_tag   = tag[LATENCY-1];
endmodule
