// tb_ref_pkg: reference models used by the testbenches.
//
// Each function computes, in plain procedural code and without reusing any
// design module, what a block should produce: the SneakySnake obstacle
// count (walking the maze by indices instead of shifting rows), the hdiff
// stencil on a plane and the Thomas solve of one column, both in the same
// Q16.16 fixed point as the design.
package tb_ref_pkg;

  // Base j of a packed 2-bit sequence.
  function automatic int base(logic [255:0] s, int j);
    return int'(s[2*j +: 2]);
  endfunction

  // Returns {pass, edits[6:0]} as the SneakySnake PE reports it.
  function automatic logic [7:0] snk_ref(logic [255:0] r, logic [255:0] q,
                                         int e, int len);
    int pos, edits, longest, n, qi;
    pos = 0;
    edits = 0;
    forever begin
      longest = 0;
      for (int d = -e; d <= e; d++) begin
        n = 0;
        forever begin
          qi = pos + n + d;
          if (pos + n >= len || qi < 0 || qi >= len) break;
          if (base(q, qi) != base(r, pos + n)) break;
          n++;
        end
        if (n > longest) longest = n;
      end
      pos += longest;
      if (pos >= len) return {1'b1, 7'(edits)};
      edits++;
      if (edits > e) return {1'b0, 7'(edits)};
      pos++;
    end
  endfunction

  function automatic int fxm(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  function automatic int fxd(int a, int b);
    longint n;
    if (b == 0) return (a < 0) ? -32'sh7fffffff : 32'sh7fffffff;
    n = longint'(a) * 65536;
    return int'(n / longint'(b));
  endfunction

  // hdiff of point (r,c) of a rows x cols plane stored in raster order.
  function automatic int hdiff_ref(int p[], int rows, int cols, int r, int c,
                                   int coeff);
    int lc, ln, ls, lw, le, fe, fw, fs, fn;
    if (r < 2 || r >= rows - 2 || c < 2 || c >= cols - 2) return p[r*cols + c];
    lc = lapl(p, cols, r, c);
    ln = lapl(p, cols, r-1, c);
    ls = lapl(p, cols, r+1, c);
    lw = lapl(p, cols, r, c-1);
    le = lapl(p, cols, r, c+1);
    fe = le - lc; if (longint'(fe) * longint'(p[r*cols+c+1] - p[r*cols+c]) > 0) fe = 0;
    fw = lc - lw; if (longint'(fw) * longint'(p[r*cols+c] - p[r*cols+c-1]) > 0) fw = 0;
    fs = ls - lc; if (longint'(fs) * longint'(p[(r+1)*cols+c] - p[r*cols+c]) > 0) fs = 0;
    fn = lc - ln; if (longint'(fn) * longint'(p[r*cols+c] - p[(r-1)*cols+c]) > 0) fn = 0;
    return p[r*cols+c] - fxm(coeff, fe - fw + fs - fn);
  endfunction

  function automatic int lapl(int p[], int cols, int r, int c);
    return 4*p[r*cols+c] - p[(r-1)*cols+c] - p[(r+1)*cols+c]
           - p[r*cols+c-1] - p[r*cols+c+1];
  endfunction

  // Thomas solve; coef holds a, b, c, d of `depth` levels each.
  function automatic void thomas_ref(int coef[], int depth, ref int x[]);
    int cp[], dp[];
    int m;
    cp = new[depth];
    dp = new[depth];
    x  = new[depth];
    for (int k = 0; k < depth; k++) begin
      int a, b, c, d, cpp, dpp;
      a = coef[k]; b = coef[depth+k]; c = coef[2*depth+k]; d = coef[3*depth+k];
      cpp = (k == 0) ? 0 : cp[k-1];
      dpp = (k == 0) ? 0 : dp[k-1];
      m = b - fxm(a, cpp);
      cp[k] = fxd(c, m);
      dp[k] = fxd(d - fxm(a, dpp), m);
    end
    x[depth-1] = dp[depth-1];
    for (int k = depth - 2; k >= 0; k--) x[k] = dp[k] - fxm(cp[k], x[k+1]);
  endfunction

  // Random 2-bit sequence, and a copy of it with `edits` random edits
  // (substitution, insertion or deletion).
  function automatic logic [255:0] rand_seq(int len);
    logic [255:0] s;
    s = '0;
    for (int j = 0; j < len; j++) s[2*j +: 2] = 2'($urandom);
    return s;
  endfunction

  function automatic logic [255:0] mutate(logic [255:0] s, int len, int edits);
    logic [255:0] t;
    t = s;
    for (int k = 0; k < edits; k++) begin
      int pos, kind;
      pos  = int'($urandom % len);
      kind = int'($urandom % 3);
      if (kind == 0) t[2*pos +: 2] = t[2*pos +: 2] + 2'(1 + $urandom % 3);
      else if (kind == 1) begin        // insertion: shift right from pos
        for (int j = len - 1; j > pos; j--) t[2*j +: 2] = t[2*(j-1) +: 2];
        t[2*pos +: 2] = 2'($urandom);
      end else begin                   // deletion: shift left from pos
        for (int j = pos; j < len - 1; j++) t[2*j +: 2] = t[2*(j+1) +: 2];
        t[2*(len-1) +: 2] = 2'($urandom);
      end
    end
    return t;
  endfunction
endpackage
