// lexi_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL: canonical code assignment from a list of
// {exponent, length} in rank order (codes of each length are consecutive,
// shorter lengths first, escape last), flit building from a list of values
// and flit parsing by brute-force prefix matching. Testbenches compare the
// hardware against these.
package lexi_ref_pkg;
  import lexi_pkg::*;

  typedef struct {
    logic [7:0]  sym [32];
    int unsigned len [32];
    logic [31:0] code [32];
    int unsigned n;          // entries, the last one is the escape leaf
  } book_t;

  // canonical codes: walk lengths upward, ranks in order within a length
  function automatic void canon(ref book_t b);
    logic [31:0] c;
    c = 0;
    for (int unsigned l = 1; l <= 31; l++) begin
      for (int unsigned r = 0; r < b.n; r++) begin
        if (b.len[r] == l) begin
          b.code[r] = c;
          c++;
        end
      end
      c = c << 1;
    end
  endfunction

  // does rank r get a LUT entry (first stage with room and wide enough)?
  function automatic void placement(input book_t b, output bit placed [32], output int stage [32]);
    int fill [4];
    fill = '{0, 0, 0, 0};
    for (int r = 0; r < 32; r++) begin
      placed[r] = 0;
      stage[r]  = -1;
      if (r < int'(b.n) - 1 && b.len[r] > 0) begin
        for (int s = 0; s < 4; s++) begin
          if (!placed[r] && fill[s] < 8 && b.len[r] <= 8 * (s + 1)) begin
            placed[r] = 1;
            stage[r]  = s;
            fill[s]++;
          end
        end
      end
    end
  endfunction

  // codeword of an exponent: {bits, length}; escape if not placed
  function automatic void enc(input book_t b, input bit placed [32], input logic [7:0] e,
                              output logic [31:0] cw, output int unsigned cwl);
    cw  = {24'hFFFFFF, e};
    cwl = 32;
    for (int r = 0; r < 32; r++) begin
      if (placed[r] && b.sym[r] == e) begin
        cw  = b.code[r];
        cwl = b.len[r];
      end
    end
  endfunction

  // build a data flit from values (assumes they fit)
  function automatic flit_t mk_data(input book_t b, input bit placed [32], input bf16_t v [$]);
    flit_t       f;
    int unsigned pos;
    f.kind    = FK_DATA;
    f.count   = 4'(v.size());
    f.payload = '0;
    pos = PAY_W;
    foreach (v[i]) begin pos--; f.payload[pos] = v[i].sign; end
    foreach (v[i]) for (int k = 6; k >= 0; k--) begin pos--; f.payload[pos] = v[i].man[k]; end
    foreach (v[i]) begin
      logic [31:0] cw; int unsigned cwl;
      enc(b, placed, v[i].exp, cw, cwl);
      for (int k = int'(cwl) - 1; k >= 0; k--) begin pos--; f.payload[pos] = cw[k]; end
    end
    return f;
  endfunction

  function automatic int unsigned bits_of(input book_t b, input bit placed [32], input bf16_t v);
    logic [31:0] cw; int unsigned cwl;
    enc(b, placed, v.exp, cw, cwl);
    return 8 + cwl;
  endfunction

  // parse a data or raw flit; returns 0 on a codeword that matches nothing
  function automatic bit parse(input book_t b, input flit_t f, output bf16_t v [$]);
    int unsigned pos, n;
    v.delete();
    n = 32'(f.count);
    if (f.kind == FK_RAW) begin
      for (int i = 0; i < int'(n); i++) v.push_back(f.payload[PAY_W-1-16*i -: 16]);
      return 1;
    end
    pos = PAY_W;
    for (int i = 0; i < int'(n); i++) begin bf16_t x; x = '0; pos--; x.sign = f.payload[pos]; v.push_back(x); end
    for (int i = 0; i < int'(n); i++) for (int k = 6; k >= 0; k--) begin pos--; v[i].man[k] = f.payload[pos]; end
    for (int i = 0; i < int'(n); i++) begin
      bit found;
      found = 0;
      for (int r = 0; r < int'(b.n) && !found; r++) begin
        bit ok;
        ok = (b.len[r] > 0) && (pos >= b.len[r]);
        for (int k = 0; k < int'(b.len[r]) && ok; k++)
          if (f.payload[pos-1-k] != b.code[r][b.len[r]-1-k]) ok = 0;
        if (ok) begin
          found = 1;
          pos -= b.len[r];
          if (r == int'(b.n) - 1) begin
            // escape leaf: the rest of the 24 ones, then the raw exponent
            pos -= 24 - b.len[r];
            for (int k = 7; k >= 0; k--) begin pos--; v[i].exp[k] = f.payload[pos]; end
          end else begin
            v[i].exp = b.sym[r];
          end
        end
      end
      if (!found) return 0;
    end
    return 1;
  endfunction

endpackage
