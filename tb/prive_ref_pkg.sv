// prive_ref_pkg: reference models used by the testbenches. They restate the
// arithmetic of the quantizers and of the encoder with plain integers, one
// dimension at a time, without the LUT/tree structure of the RTL.
package prive_ref_pkg;

  // Design-time tie bit (same formula the RTL uses to fix its LUT contents).
  function automatic bit ref_tie(int unsigned seed, int unsigned idx);
    bit [31:0] h;
    h = seed * 32'h9E37_79B1 + idx * 32'h85EB_CA6B + 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h[7];
  endfunction

  // Approximate bipolar majority: vote of each group of six, tie -> tie bit,
  // then vote of the group results.
  function automatic bit ref_bipolar(bit b[], int unsigned seed);
    int n, ng, votes;
    n = b.size();
    ng = (n + 5) / 6;
    votes = 0;
    for (int g = 0; g < ng; g++) begin
      int ones = 0, cnt = 0;
      for (int i = 6 * g; i < 6 * g + 6 && i < n; i++) begin
        ones += b[i];
        cnt++;
      end
      if (2 * ones > cnt) votes++;
      else if (2 * ones == cnt && ref_tie(seed, g)) votes++;
    end
    if (2 * votes > ng) return 1;
    if (2 * votes == ng) return ref_tie(seed, ng);
    return 0;
  endfunction

  // Does any group of six tie?
  function automatic bit ref_any_tie(bit b[]);
    int n;
    n = b.size();
    for (int g = 0; g < (n + 5) / 6; g++) begin
      int ones = 0, cnt = 0;
      for (int i = 6 * g; i < 6 * g + 6 && i < n; i++) begin
        ones += b[i];
        cnt++;
      end
      if (2 * ones == cnt) return 1;
    end
    return 0;
  endfunction

  function automatic int floor_half(int s);
    return (s >= 0) ? s / 2 : -((-s + 1) / 2);
  endfunction

  // Truncating ternary tree: sums of three, then pairwise halved sums over a
  // power-of-two number of leaves. Values in -1..+1.
  function automatic int ref_tern_sum(int v[]);
    int n, nl, np;
    int lvl[$];
    n = v.size();
    nl = (n + 2) / 3;
    np = 1;
    while (np < nl) np *= 2;
    for (int i = 0; i < np; i++) begin
      int s = 0;
      for (int j = 3 * i; j < 3 * i + 3 && j < n; j++) s += v[j];
      lvl.push_back(s);
    end
    while (lvl.size() > 1) begin
      int nxt[$];
      for (int i = 0; i < lvl.size(); i += 2) nxt.push_back(floor_half(lvl[i] + lvl[i+1]));
      lvl = nxt;
    end
    return lvl[0];
  endfunction

  // Ternary value -> 2-bit code and back.
  function automatic bit [1:0] enc_tern(int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b11 : 2'b00;
  endfunction

  function automatic int dec_tern(bit [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  function automatic int ref_tern_q(int s, int tp, int tn);
    if (s >= tp) return 1;
    if (s <= tn) return -1;
    return 0;
  endfunction

endpackage
