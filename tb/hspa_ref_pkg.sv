// hspa_ref_pkg: behavioural reference of the 3GPP UMTS/HSPA+ turbo
// interleaver for the testbenches. Written straight from the standard's
// description (rows R, prime p with its smallest primitive root, base
// sequence s, primes q_i, intra-row permutations U_i, inter-row pattern T,
// column-wise read-out), with no tables shared with the RTL except the two
// 20-row patterns. build(K) fills `pi`: for every column-major position n of
// the R x C matrix the natural bit index found there, or -1 for a dummy.
package hspa_ref_pkg;
  int R, C, P, V;
  int s[$];
  int T[20];
  int q[20];
  int rr[20];
  int pi[$];

  function automatic bit is_prime(int x);
    if (x < 2) return 0;
    for (int d = 2; d * d <= x; d++) if (x % d == 0) return 0;
    return 1;
  endfunction

  function automatic int prim_root(int pr);
    for (int g = 2; g < pr; g++) begin
      int x = 1; bit ok = 1;
      for (int e = 1; e < pr - 1; e++) begin
        x = (x * g) % pr;
        if (x == 1) begin ok = 0; break; end
      end
      if (ok) return g;
    end
    return 0;
  endfunction

  function automatic int gcd(int a, int b);
    while (b != 0) begin int t = a % b; a = b; b = t; end
    return a;
  endfunction

  function automatic void build(int K);
    int pa[20] = '{19, 9, 14, 4, 0, 2, 5, 7, 12, 18, 16, 13, 17, 15, 3, 1, 6, 11, 8, 10};
    int pb[20] = '{19, 9, 14, 4, 0, 2, 5, 7, 12, 18, 10, 8, 13, 17, 3, 1, 16, 6, 15, 11};
    int U;
    if (K <= 159) R = 5;
    else if (K <= 200 || (K >= 481 && K <= 530)) R = 10;
    else R = 20;
    if (K >= 481 && K <= 530) begin P = 53; C = P; end
    else begin
      P = 7;
      while (!(is_prime(P) && K <= R * (P + 1))) P++;
      if (K <= R * (P - 1)) C = P - 1;
      else if (K <= R * P) C = P;
      else C = P + 1;
    end
    V = prim_root(P);
    s.delete();
    s.push_back(1);
    for (int j = 1; j <= P - 2; j++) s.push_back((V * s[j-1]) % P);
    q[0] = 1;
    for (int i = 1; i < R; i++) begin
      int c = q[i-1] + 1;
      while (!(is_prime(c) && c > 6 && gcd(c, P - 1) == 1)) c++;
      q[i] = c;
    end
    for (int i = 0; i < R; i++) begin
      if (R == 5 || R == 10) T[i] = R - 1 - i;
      else if ((K >= 2281 && K <= 2480) || (K >= 3161 && K <= 3210)) T[i] = pa[i];
      else T[i] = pb[i];
    end
    for (int i = 0; i < R; i++) rr[T[i]] = q[i];
    pi.delete();
    for (int j = 0; j < C; j++)
      for (int i = 0; i < R; i++) begin
        int a = T[i];
        if (C == P - 1) U = s[(j * rr[a]) % (P - 1)] - 1;
        else if (j < P - 1) U = s[(j * rr[a]) % (P - 1)];
        else if (j == P - 1) U = 0;
        else U = P;
        if (C == P + 1 && K == R * C && a == R - 1) begin
          if (j == 0) U = P;
          else if (j == P) U = 1;
        end
        pi.push_back((a * C + U < K) ? a * C + U : -1);
      end
  endfunction
endpackage
