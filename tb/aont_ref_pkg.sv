// aont_ref_pkg -- behavioural reference model of the quasigroup AONT, for testbenches.
//
// Written directly from the algebra, independently of the RTL: symbols are
// the integers 1..n (code 0 = n), a . b = a * k_b mod p is evaluated with
// the % operator, a o c is found by searching for the b with a . b = c, and
// modular inverses by searching too.  Messages and pseudo-messages are int
// arrays of symbol codes, element (i, j) (1-based) at index (i-1)*n + (j-1).
// Also holds XY / YX path tracing for the routing checks.
package aont_ref_pkg;

  function automatic int sym(int c, int n);
    return (c == 0) ? n : c;
  endfunction

  function automatic int mulc(int a, int b, int n);
    return (sym(a, n) * sym(b, n)) % (n + 1) % n;   // residue n -> code 0
  endfunction

  function automatic int invc(int a, int n);
    for (int b = 0; b < n; b++) if (mulc(a, b, n) == 1) return b;
    return -1;
  endfunction

  // a . b with key K' (key[j-1] = k_j); column b = j has code j mod n
  function automatic int qop(int a, int b, int key[], int n);
    int j;
    j = (b == 0) ? n : b;
    return mulc(a, key[j-1], n);
  endfunction

  function automatic int qdual(int a, int c, int key[], int n);
    for (int b = 0; b < n; b++) if (qop(a, b, key, n) == c) return b;
    return -1;
  endfunction

  function automatic int leader(int key[], int n);
    int l;
    l = key[0];
    for (int j = 1; j < n; j++) l = qop(key[j], l, key, n);
    return l;
  endfunction

  // base-n digit j (1-based, j = n least significant) of block number i
  function automatic int digit(int i, int j, int n);
    int v;
    v = i;
    for (int k = n; k > j; k--) v = v / n;
    return v % n;
  endfunction

  function automatic void encode(int msg[], int key[], int n, int s, ref int ps[]);
    int l, r;
    int c[];
    ps = new[(s + 1) * n];
    c  = new[n];
    l  = leader(key, n);
    for (int i = 1; i <= s; i++) begin
      r = l;
      for (int j = n; j >= 1; j--) begin
        r = qop(r, digit(i, j, n), key, n);
        ps[(i-1)*n + j-1] = qop(r, msg[(i-1)*n + j-1], key, n);
      end
    end
    for (int j = 0; j < n; j++) begin
      c[j] = ps[j];
      for (int i = 2; i <= s; i++) c[j] = mulc(c[j], ps[(i-1)*n + j], n);
      ps[s*n + j] = mulc(c[j], key[j], n);
    end
  endfunction

  function automatic void decode(int ps[], int n, int s, ref int msg[], ref int key[]);
    int l, r, c;
    msg = new[s * n];
    key = new[n];
    for (int j = 0; j < n; j++) begin
      c = ps[j];
      for (int i = 2; i <= s; i++) c = mulc(c, ps[(i-1)*n + j], n);
      key[j] = mulc(ps[s*n + j], invc(c, n), n);
    end
    l = leader(key, n);
    for (int i = 1; i <= s; i++) begin
      r = l;
      for (int j = n; j >= 1; j--) begin
        r = qop(r, digit(i, j, n), key, n);
        msg[(i-1)*n + j-1] = qdual(r, ps[(i-1)*n + j-1], key, n);
      end
    end
  endfunction

  function automatic void random_key(int n, ref int key[]);
    int t, k;
    key = new[n];
    for (int j = 0; j < n; j++) key[j] = (j + 1) % n;
    for (int j = n - 1; j > 0; j--) begin
      k = $urandom_range(j, 0);
      t = key[j]; key[j] = key[k]; key[k] = t;
    end
  endfunction

  // routers visited going from (x0,y0) to (x1,y1), excluding the start
  function automatic void trace(int x0, int y0, int x1, int y1, bit yx, ref int px[$], ref int py[$]);
    int x, y;
    x = x0; y = y0;
    if (!yx) begin
      while (x != x1) begin x += (x1 > x) ? 1 : -1; px.push_back(x); py.push_back(y); end
      while (y != y1) begin y += (y1 > y) ? 1 : -1; px.push_back(x); py.push_back(y); end
    end else begin
      while (y != y1) begin y += (y1 > y) ? 1 : -1; px.push_back(x); py.push_back(y); end
      while (x != x1) begin x += (x1 > x) ? 1 : -1; px.push_back(x); py.push_back(y); end
    end
  endfunction

endpackage
