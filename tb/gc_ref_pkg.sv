// gc_ref_pkg: reference models for the testbenches, written independently of
// the RTL.
//
// - AES-128 on a byte-array state, with the S-box found by searching for the
//   multiplicative inverse (not by exponentiation as in the RTL) and checked
//   against the FIPS-197 example in the testbenches;
// - the Half-Gates hash, garbling and evaluation of one AND gate;
// - a sequential interpreter of the accelerator's instruction set: each
//   instruction reads its two wires, then performs the OoRW transfers its
//   fetch bits ask for, computes the gate, writes Wire Memory unless WEN = 1
//   and records the label if LIVE = 1. Any correct pipeline must produce the
//   same results as this in-order, one-at-a-time model.
// - a random program generator that respects the rules the compiler follows.
package gc_ref_pkg;
  import apint_pkg::*;

  typedef logic [7:0] bytes16_t [16];

  function automatic logic [7:0] r_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
    end
    return p;
  endfunction

  function automatic logic [7:0] r_sbox(logic [7:0] x);
    logic [7:0] inv = 0, s;
    if (x != 0)
      for (int y = 1; y < 256; y++) if (r_mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  logic [7:0] sb [256];
  bit         sb_done = 0;

  function automatic void init_sbox();
    if (!sb_done) begin
      for (int i = 0; i < 256; i++) sb[i] = r_sbox(8'(i));
      sb_done = 1;
    end
  endfunction

  function automatic logic [127:0] aes_enc(logic [127:0] key, logic [127:0] pt);
    logic [7:0] st [16];
    logic [7:0] t [16];
    logic [7:0] k [176];
    logic [7:0] rc = 8'h01;
    logic [7:0] tmp [4];
    logic [127:0] o;
    init_sbox();
    for (int i = 0; i < 16; i++) begin
      k[i]  = key[127-8*i -: 8];
      st[i] = pt[127-8*i -: 8];
    end
    for (int i = 16; i < 176; i += 4) begin
      for (int j = 0; j < 4; j++) tmp[j] = k[i-4+j];
      if (i % 16 == 0) begin
        logic [7:0] f = tmp[0];
        tmp[0] = sb[tmp[1]] ^ rc; tmp[1] = sb[tmp[2]]; tmp[2] = sb[tmp[3]]; tmp[3] = sb[f];
        rc = r_mul(rc, 8'h02);
      end
      for (int j = 0; j < 4; j++) k[i+j] = k[i-16+j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) st[i] ^= k[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) t[i] = sb[st[i]];
      // shift rows: row r_ of column c comes from column c+r_
      for (int c = 0; c < 4; c++)
        for (int rr = 0; rr < 4; rr++) st[4*c+rr] = t[4*((c+rr)%4)+rr];
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          logic [7:0] a0 = st[4*c], a1 = st[4*c+1], a2 = st[4*c+2], a3 = st[4*c+3];
          st[4*c]   = r_mul(a0,2) ^ r_mul(a1,3) ^ a2 ^ a3;
          st[4*c+1] = a0 ^ r_mul(a1,2) ^ r_mul(a2,3) ^ a3;
          st[4*c+2] = a0 ^ a1 ^ r_mul(a2,2) ^ r_mul(a3,3);
          st[4*c+3] = r_mul(a0,3) ^ a1 ^ a2 ^ r_mul(a3,2);
        end
      for (int i = 0; i < 16; i++) st[i] ^= k[16*r+i];
    end
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = st[i];
    return o;
  endfunction

  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;

  function automatic logic [127:0] gf_dbl(logic [127:0] x);
    logic [127:0] y = x << 1;
    if (x[127]) y[7:0] ^= 8'h87;
    return y;
  endfunction

  function automatic logic [127:0] hash(logic [127:0] x, logic [127:0] tweak);
    logic [127:0] m = gf_dbl(x) ^ tweak;
    return aes_enc(KEY, m) ^ m;
  endfunction

  // Half-Gates garbling: returns output 0-label, fills tg/te
  function automatic logic [127:0] garble_and(logic [127:0] a0, logic [127:0] b0,
      logic [127:0] r, int unsigned g, output logic [127:0] tg, output logic [127:0] te);
    logic [127:0] j0 = 128'(2*longint'(g)), j1 = 128'(2*longint'(g)+1);
    logic [127:0] ha0 = hash(a0, j0), ha1 = hash(a0 ^ r, j0);
    logic [127:0] hb0 = hash(b0, j1), hb1 = hash(b0 ^ r, j1);
    logic [127:0] wg, we;
    tg = ha0 ^ ha1 ^ (b0[0] ? r : 0);
    wg = ha0 ^ (a0[0] ? tg : 0);
    te = hb0 ^ hb1 ^ a0;
    we = hb0 ^ (b0[0] ? (te ^ a0) : 0);
    return wg ^ we;
  endfunction

  function automatic logic [127:0] eval_and(logic [127:0] a, logic [127:0] b,
      int unsigned g, logic [127:0] tg, logic [127:0] te);
    logic [127:0] j0 = 128'(2*longint'(g)), j1 = 128'(2*longint'(g)+1);
    return hash(a, j0) ^ (a[0] ? tg : 0) ^ hash(b, j1) ^ (b[0] ? (te ^ a) : 0);
  endfunction

  // ------------------------------------------------------------------------
  // Sequential interpreter. mem: Wire Memory image (modified in place).
  // oorw: labels in the order the program fetches them. tbl_in: garbled tables
  // in AND-gate order (evaluation). Returns per instruction the output label
  // (out[i]) and, when garbling, the table of each AND instruction.
  class gc_machine;
    logic [127:0] mem [];
    logic [127:0] oorw [$];
    logic [255:0] tbl_in [$];
    logic [127:0] out [];
    logic [255:0] tbl_out [];
    bit           is_and [];

    function new(int depth);
      mem = new[depth];
    endfunction

    function automatic void run(instr_t prog [$], mode_e mode, logic [127:0] r);
      int unsigned g = 0;
      int k = 0, t = 0;
      out = new[prog.size()];
      tbl_out = new[prog.size()];
      is_and = new[prog.size()];
      foreach (prog[i]) begin
        logic [127:0] a = mem[prog[i].rd_addr0], b = mem[prog[i].rd_addr1], o;
        logic [127:0] tg, te;
        if (prog[i].oorw_fetch[0]) mem[prog[i].rd_addr0] = oorw[k++];
        if (prog[i].oorw_fetch[1]) mem[prog[i].rd_addr1] = oorw[k++];
        is_and[i] = prog[i].op == OP_AND;
        if (prog[i].op == OP_XOR) o = a ^ b;
        else if (mode == MODE_GARBLE) begin
          o = garble_and(a, b, r, g, tg, te);
          tbl_out[i] = {tg, te};
          g++;
        end else begin
          {tg, te} = tbl_in[t++];
          o = eval_and(a, b, g, tg, te);
          g++;
        end
        if (!prog[i].wen) mem[prog[i].wr_addr] = o;
        out[i] = o;
      end
    endfunction
  endclass

  // Plain-bit interpreter of the same program (for garble/evaluate checks).
  function automatic void run_bits(instr_t prog [$], ref bit mem [], bit oorw [$], ref bit out []);
    int k = 0;
    out = new[prog.size()];
    foreach (prog[i]) begin
      bit a = mem[prog[i].rd_addr0], b = mem[prog[i].rd_addr1], o;
      if (prog[i].oorw_fetch[0]) mem[prog[i].rd_addr0] = oorw[k++];
      if (prog[i].oorw_fetch[1]) mem[prog[i].rd_addr1] = oorw[k++];
      o = (prog[i].op == OP_XOR) ? (a ^ b) : (a & b);
      if (!prog[i].wen) mem[prog[i].wr_addr] = o;
      out[i] = o;
    end
  endfunction

  // Random program over addresses [0, naddr): follows the compiler's rules
  // (an address being refilled by an OoRW transfer is not also written or
  // read twice by the same instruction). Returns the number of OoRW fetches.
  function automatic int gen_prog(ref instr_t prog [$], input int n, input int naddr,
                                  input int pct_and, input int pct_fetch, input int pct_wen);
    int nf = 0;
    prog.delete();
    for (int i = 0; i < n; i++) begin
      instr_t x;
      x.rd_addr0   = waddr_t'($urandom_range(naddr-1));
      x.rd_addr1   = waddr_t'($urandom_range(naddr-1));
      x.op         = ($urandom_range(99) < pct_and) ? OP_AND : OP_XOR;
      x.oorw_fetch = '0;
      if ($urandom_range(99) < pct_fetch) x.oorw_fetch[$urandom_range(1)] = 1'b1;
      if (x.rd_addr0 == x.rd_addr1 && x.oorw_fetch != 0) x.oorw_fetch = 2'b01;
      do x.wr_addr = waddr_t'($urandom_range(naddr-1));
      while ((x.oorw_fetch[0] && x.wr_addr == x.rd_addr0) ||
             (x.oorw_fetch[1] && x.wr_addr == x.rd_addr1));
      x.wen  = ($urandom_range(99) < pct_wen);
      x.live = x.wen || ($urandom_range(99) < 30);
      nf += int'(x.oorw_fetch[0]) + int'(x.oorw_fetch[1]);
      prog.push_back(x);
    end
    return nf;
  endfunction
endpackage
