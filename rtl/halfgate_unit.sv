// halfgate_unit: pipelined Half-Gate AND unit for garbling and evaluation.
//
// Garbling (mode = MODE_GARBLE) takes the 0-labels A0, B0 of the two input
// wires and the global FreeXOR offset R, runs four AES hashes in parallel and
// returns the output 0-label and the two-ciphertext garbled table. Evaluation
// (mode = MODE_EVAL) takes the active labels A, B and the gate's table, runs
// two hashes and returns the active output label. The equations are the
// Half-Gates scheme (Zahur, Rosulek, Evans) that the paper builds on:
//   garble:   TG = H(A0,j)^H(A1,j)^pb*R        WG0 = H(A0,j)^pa*TG
//             TE = H(B0,j')^H(B1,j')^A0       WE0 = H(B0,j')^pb*(TE^A0)
//             C0 = WG0^WE0, with A1=A0^R, B1=B0^R, pa=lsb(A0), pb=lsb(B0)
//   evaluate: C = H(A,j)^sa*TG ^ H(B,j')^sb*(TE^A), sa=lsb(A), sb=lsb(B)
// j = 2*gidx and j' = 2*gidx+1, where gidx is the index of the AND gate.
// The hash H(X,t) = AES_K(2X^t) ^ 2X ^ t, with 2X the doubling in GF(2^128),
// is this design's choice: the paper names AES but not the hash.
//
// Timing: one gate may enter per cycle. The datapath is 13 register stages
// (input preparation, eleven AES stages, combination); a delay line then pads
// the result to the paper's latencies, 18 cycles for evaluation and 21 for
// garbling, so out_valid follows in_valid by exactly EVAL_LAT or GARBLE_LAT
// cycles. The mode must stay constant while gates are in flight.
module halfgate_unit
  import apint_pkg::*;
#(
  parameter int unsigned  EVAL_LAT   = 18,
  parameter int unsigned  GARBLE_LAT = 21,
  parameter int unsigned  TAG_W      = 16,
  parameter logic [127:0] AES_KEY    = 128'h000102030405060708090a0b0c0d0e0f
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mode_e            mode,
  input  label_t           r_delta,     // FreeXOR offset R (garbling only)
  input  logic             in_valid,
  input  label_t           in_a,
  input  label_t           in_b,
  input  logic [GIDX_W-1:0] in_gidx,
  input  gtable_t          in_table,    // evaluation only
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output label_t           out_label,
  output gtable_t          out_table,   // garbling only
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned BASE_LAT = 13;
  localparam int unsigned PAD = GARBLE_LAT - BASE_LAT;  // delay line depth

  initial begin
    assert (EVAL_LAT > BASE_LAT && GARBLE_LAT >= EVAL_LAT)
      else $fatal(1, "halfgate_unit: latencies must exceed %0d", BASE_LAT);
  end

  function automatic label_t dbl(input label_t x);
    return {x[126:0], 1'b0} ^ (x[127] ? 128'h87 : 128'h0);
  endfunction

  // ---- stage 1: hash inputs ------------------------------------------------
  label_t  twk_a, twk_b;
  label_t  x [4];
  always_comb begin
    twk_a = label_t'({in_gidx, 1'b0});
    twk_b = label_t'({in_gidx, 1'b1});
    x[0] = dbl(in_a) ^ twk_a;
    x[1] = dbl(in_a ^ r_delta) ^ twk_a;
    x[2] = dbl(in_b) ^ twk_b;
    x[3] = dbl(in_b ^ r_delta) ^ twk_b;
  end

  logic   p_valid;
  label_t p_x [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= in_valid;
  end
  always_ff @(posedge clk) for (int i = 0; i < 4; i++) p_x[i] <= x[i];

  // Side information delayed to meet the AES outputs (1 + 11 cycles).
  localparam int unsigned SD = 12;
  typedef struct packed {
    label_t           a;
    label_t           b;
    gtable_t          tbl;
    label_t           xa0, xa1, xb0, xb1;
    logic [TAG_W-1:0] tag;
  } side_t;
  side_t side [SD];
  always_ff @(posedge clk) begin
    side[0] <= '{a: in_a, b: in_b, tbl: in_table, xa0: x[0], xa1: x[1],
                 xb0: x[2], xb1: x[3], tag: in_tag};
    for (int i = 1; i < SD; i++) side[i] <= side[i-1];
  end

  // ---- stages 2..12: four AES lanes ---------------------------------------
  label_t e     [4];
  logic   e_v   [4];
  logic   e_tag [4];   // unused one-bit tag of the AES lanes
  for (genvar g = 0; g < 4; g++) begin : g_aes
    // lanes 1 and 3 (the 1-labels) are only needed when garbling
    logic lane_en;
    assign lane_en = p_valid && (g % 2 == 0 || mode == MODE_GARBLE);
    aes128_pipe #(.KEY(AES_KEY), .TAG_W(1)) u_aes (
      .clk, .rst_n,
      .in_valid (lane_en), .in_block(p_x[g]), .in_tag(1'b0),
      .out_valid(e_v[g]),  .out_block(e[g]),  .out_tag(e_tag[g])
    );
  end

  // ---- stage 13: combine ---------------------------------------------------
  side_t  s;
  label_t ha0, ha1, hb0, hb1, tg, te, wg, we;
  logic   pa, pb;
  always_comb begin
    s   = side[SD-1];
    ha0 = e[0] ^ s.xa0;
    ha1 = e[1] ^ s.xa1;
    hb0 = e[2] ^ s.xb0;
    hb1 = e[3] ^ s.xb1;
    pa  = s.a[0];
    pb  = s.b[0];
    if (mode == MODE_GARBLE) begin
      tg = ha0 ^ ha1 ^ (pb ? r_delta : '0);
      te = hb0 ^ hb1 ^ s.a;
      wg = ha0 ^ (pa ? tg : '0);
      we = hb0 ^ (pb ? (te ^ s.a) : '0);
    end else begin
      tg = s.tbl.tg;
      te = s.tbl.te;
      wg = ha0 ^ (pa ? tg : '0);
      we = hb0 ^ (pb ? (te ^ s.a) : '0);
    end
  end

  typedef struct packed {
    label_t           lbl;
    gtable_t          tbl;
    logic [TAG_W-1:0] tag;
  } res_t;

  logic c_valid;
  res_t c_res;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_valid <= 1'b0;
    else        c_valid <= e_v[0];
  end
  always_ff @(posedge clk) c_res <= '{lbl: wg ^ we, tbl: '{tg: tg, te: te}, tag: s.tag};

  // ---- delay line to the paper's latency ----------------------------------
  logic d_valid [PAD];
  res_t d_res   [PAD];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < PAD; i++) d_valid[i] <= 1'b0;
    else begin
      d_valid[0] <= c_valid;
      for (int i = 1; i < PAD; i++) d_valid[i] <= d_valid[i-1];
    end
  end
  always_ff @(posedge clk) begin
    d_res[0] <= c_res;
    for (int i = 1; i < PAD; i++) d_res[i] <= d_res[i-1];
  end

  localparam int unsigned TAP_E = EVAL_LAT - BASE_LAT - 1;
  localparam int unsigned TAP_G = GARBLE_LAT - BASE_LAT - 1;
  logic [$clog2(PAD)-1:0] tap;
  assign tap       = (mode == MODE_GARBLE) ? TAP_G[$clog2(PAD)-1:0] : TAP_E[$clog2(PAD)-1:0];
  assign out_valid = d_valid[tap];
  assign out_label = d_res[tap].lbl;
  assign out_table = d_res[tap].tbl;
  assign out_tag   = d_res[tap].tag;
endmodule
