// platinum_tb_pkg -- software side of the accelerator, for the testbenches.
//
// Generates the two build paths and the matching weight encodings.
//   Ternary (c = 5): LUT entries are the weight vectors whose leftmost
//   non-zero element is +1 (121 of them plus the zero vector). The path is a
//   breadth-first spanning tree rooted at the zero vector: a vector's parent
//   is the vector with its last non-zero element cleared, so each entry is
//   lut[child] = lut[parent] +/- a[j]. Indices are given in path order, so the
//   LUT is filled sequentially.
//   Bit-serial (c = 7): the same over binary vectors, 127 entries.
// With this order a parent is always at least 5 entries ahead of its child,
// more than the 2 entries the construction pipeline keeps in flight.
// A weight vector is encoded as {sign, index}: sign = 1 when its leftmost
// non-zero element is -1, and index is that of the negated vector.
package platinum_tb_pkg;
  import platinum_pkg::*;

  localparam int TER_CODES = 243;   // 3^5
  localparam int BS_CODES  = 128;   // 2^7

  path_entry_t ter_path[$];
  path_entry_t bs_path[$];
  int          ter_idx[TER_CODES];  // base-3 code (digit 1 = +1, 2 = -1) -> LUT index, -1 if not stored
  int          bs_idx[BS_CODES];    // 7-bit vector -> LUT index
  int          ter_vec_of[LUT_DEPTH][C_TER]; // LUT index -> stored ternary vector
  int          bs_vec_of[LUT_DEPTH][C_BS];

  function automatic int digit(int code, int j);
    int d = code;
    for (int i = 0; i < j; i++) d = d / 3;
    return d % 3;
  endfunction

  function automatic int pow3(int j);
    int p = 1;
    for (int i = 0; i < j; i++) p = p * 3;
    return p;
  endfunction

  function automatic void build_paths();
    int q[$];
    int next;
    path_entry_t e;
    ter_path.delete(); bs_path.delete();
    foreach (ter_idx[i]) ter_idx[i] = -1;
    foreach (bs_idx[i]) bs_idx[i] = -1;
    foreach (ter_vec_of[i, j]) ter_vec_of[i][j] = 0;
    foreach (bs_vec_of[i, j]) bs_vec_of[i][j] = 0;
    // ternary
    ter_idx[0] = 0; next = 1; q.push_back(0);
    while (q.size() > 0) begin
      int v, lp;
      v = q.pop_front();
      lp = -1;
      for (int j = 0; j < C_TER; j++) if (digit(v, j) != 0) lp = j;
      for (int j = lp + 1; j < C_TER; j++) begin
        for (int s = 1; s <= ((v == 0) ? 1 : 2); s++) begin
          int ch;
          ch = v + s * pow3(j);
          ter_idx[ch] = next;
          for (int k = 0; k < C_TER; k++) ter_vec_of[next][k] = (digit(ch, k) == 2) ? -1 : digit(ch, k);
          e.finish = 1'b0; e.dst = LUT_AW'(next); e.src = LUT_AW'(ter_idx[v]);
          e.j = J_W'(j); e.sign = (s == 2);
          ter_path.push_back(e);
          q.push_back(ch);
          next++;
        end
      end
    end
    e = '0; e.finish = 1'b1; ter_path.push_back(e);
    // bit-serial
    bs_idx[0] = 0; next = 1; q.push_back(0);
    while (q.size() > 0) begin
      int v, lp;
      v = q.pop_front();
      lp = -1;
      for (int j = 0; j < C_BS; j++) if (v[j]) lp = j;
      for (int j = lp + 1; j < C_BS; j++) begin
        int ch;
        ch = v | (1 << j);
        bs_idx[ch] = next;
        for (int k = 0; k < C_BS; k++) bs_vec_of[next][k] = ch[k];
        e.finish = 1'b0; e.dst = LUT_AW'(next); e.src = LUT_AW'(bs_idx[v]);
        e.j = J_W'(j); e.sign = 1'b0;
        bs_path.push_back(e);
        q.push_back(ch);
        next++;
      end
    end
    e = '0; e.finish = 1'b1; bs_path.push_back(e);
  endfunction

  // Encode five ternary weights w[0..4] (each -1, 0 or +1).
  function automatic wcode_t enc_ter(int w[C_TER]);
    int lead = 0;
    int code = 0;
    wcode_t r;
    for (int j = C_TER - 1; j >= 0; j--) if (w[j] != 0) lead = w[j];
    for (int j = 0; j < C_TER; j++) begin
      int d = w[j] * ((lead < 0) ? -1 : 1);
      code += ((d < 0) ? 2 : d) * pow3(j);
    end
    r.sign = (lead < 0);
    r.idx  = LUT_AW'(ter_idx[code]);
    return r;
  endfunction

  // Encode one bit plane of seven weights; neg flips the looked-up value.
  function automatic wcode_t enc_bs(int bits[C_BS], bit neg);
    int code = 0;
    wcode_t r;
    for (int j = 0; j < C_BS; j++) code |= (bits[j] & 1) << j;
    r.sign = neg;
    r.idx  = LUT_AW'(bs_idx[code]);
    return r;
  endfunction

  // Smallest distance, in path entries, between an entry and its source.
  function automatic int min_raw_distance(path_entry_t p[$]);
    int pos[LUT_DEPTH];
    int md = 1000;
    foreach (pos[i]) pos[i] = -1;
    foreach (p[i]) begin
      if (!p[i].finish) begin
        if (p[i].src != 0 && pos[p[i].src] >= 0 && (i - pos[p[i].src]) < md) md = i - pos[p[i].src];
        pos[p[i].dst] = i;
      end
    end
    return md;
  endfunction

endpackage
