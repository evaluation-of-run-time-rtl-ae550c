// tb_ref_pkg: reference models used by the testbenches, written from the
// specification of each circuit rather than from its RTL.
package tb_ref_pkg;

  // Value 2*cout+sum of the error-controllable full adder: exact when er = 1;
  // when er = 0, the pattern a=0,b=1,cin=1 yields 1 and a=1,b=0,cin=0 yields 2.
  function automatic logic [1:0] fa_ref(input logic a, b, cin, er);
    int v;
    v = int'(a) + int'(b) + int'(cin);
    if (!er && !a && b && cin) v = 1;
    if (!er && a && !b && !cin) v = 2;
    return 2'(v);
  endfunction

  // Ripple chain of fa_ref cells, w bits; returns {cout, sum}.
  function automatic logic [32:0] rca_ref(input logic [31:0] a, b, input logic cin,
                                          input logic [31:0] er, input int w);
    logic [32:0] r;
    logic        c;
    logic [1:0]  v;
    r = '0;
    c = cin;
    for (int i = 0; i < w; i++) begin
      v    = fa_ref(a[i], b[i], c, er[i]);
      r[i] = v[0];
      c    = v[1];
    end
    r[w] = c;
    return r;
  endfunction

  // Carry-select adder made of 4-bit ripple blocks: the lowest block takes cin, each
  // higher block adds with carry-in 0 and an exact +1 is applied when the carry
  // from the block below is set.
  function automatic logic [32:0] csa_ref(input logic [31:0] a, b, input logic cin,
                                          input logic [31:0] er);
    logic [32:0] r;
    logic [4:0]  blk;
    logic        c;
    r   = '0;
    blk = rca_ref({28'd0, a[3:0]}, {28'd0, b[3:0]}, cin, {28'd0, er[3:0]}, 4)[4:0];
    r[3:0] = blk[3:0];
    c      = blk[4];
    for (int k = 1; k < 8; k++) begin
      blk = rca_ref({28'd0, a[4*k +: 4]}, {28'd0, b[4*k +: 4]}, 1'b0, {28'd0, er[4*k +: 4]}, 4)[4:0];
      if (c) blk = {blk[4] | (&blk[3:0]), blk[3:0] + 4'd1};
      r[4*k +: 4] = blk[3:0];
      c           = blk[4];
    end
    r[32] = c;
    return r;
  endfunction

  // Largest error magnitude of the 8x8 multiplier for error control er: each
  // approximate cell (er[k] = 0, at product bit 4+k) adds at most one unit there.
  function automatic int unsigned m8_bound(input logic [6:0] er);
    int unsigned s;
    s = 0;
    for (int k = 0; k < 7; k++) if (!er[k]) s += (1 << (4 + k));
    return s;
  endfunction

  function automatic longint signed sext64(input logic [31:0] x, input logic s);
    return s ? longint'($signed(x)) : longint'({32'd0, x});
  endfunction

endpackage
