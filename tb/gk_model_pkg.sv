// gk_model_pkg: reference model of the GateKeeper filter for the testbenches.
//
// Written independently of the RTL: sequences are queues of base codes
// (A=0, C=1, G=2, T=3), masks are queues of bits indexed by base position
// (0 = first base), shifting is done by re-indexing bases, and amending is
// done by finding zero runs of length one or two with a one on both sides.
// Also provides sequence generation with substitutions, insertions and
// deletions, and packing into the RTL's vector layout (first base in the most
// significant pair of the low 2*L bits).
package gk_model_pkg;

  localparam int MAXL = 320;
  typedef bit [2*MAXL-1:0] vec_t;
  typedef bit [MAXL-1:0]   mvec_t;
  typedef int unsigned     seq_t[$];
  typedef bit              mask_t[$];

  function automatic seq_t random_seq(int len);
    seq_t s;
    for (int i = 0; i < len; i++) s.push_back($urandom_range(0, 3));
    return s;
  endfunction

  function automatic seq_t from_string(string str);
    seq_t s;
    for (int i = 0; i < str.len(); i++)
      case (str[i])
        "A": s.push_back(0);
        "C": s.push_back(1);
        "G": s.push_back(2);
        default: s.push_back(3);
      endcase
    return s;
  endfunction

  // Apply edits to a copy of ref and keep the first len bases (padding with
  // random bases if deletions made it short).
  function automatic seq_t mutate(seq_t src, int len, int nsub, int nins, int ndel);
    seq_t s = src;
    int p;
    for (int k = 0; k < nsub; k++) begin
      p = $urandom_range(0, s.size() - 1);
      s[p] = (s[p] + $urandom_range(1, 3)) % 4;
    end
    for (int k = 0; k < nins; k++) begin
      p = $urandom_range(1, s.size() - 2);
      s.insert(p, $urandom_range(0, 3));
    end
    for (int k = 0; k < ndel; k++) begin
      p = $urandom_range(1, s.size() - 2);
      s.delete(p);
    end
    while (s.size() < len) s.push_back($urandom_range(0, 3));
    while (s.size() > len) void'(s.pop_back());
    return s;
  endfunction

  function automatic vec_t pack(seq_t s);
    vec_t v = '0;
    int L = s.size();
    for (int i = 0; i < L; i++) begin
      v[2*(L-1-i)+1] = s[i][1];
      v[2*(L-1-i)]   = s[i][0];
    end
    return v;
  endfunction

  function automatic mvec_t pack_mask(mask_t m);
    mvec_t v = '0;
    int L = m.size();
    for (int i = 0; i < L; i++) v[L-1-i] = m[i];
    return v;
  endfunction

  function automatic mask_t unpack_mask(mvec_t v, int L);
    mask_t m;
    for (int i = 0; i < L; i++) m.push_back(v[L-1-i]);
    return m;
  endfunction

  // Base-level mismatch mask with the read moved by sh bases (sh>0: read
  // base i sits at position i+sh; vacated positions hold base code 0).
  function automatic mask_t mask_of(seq_t rd, seq_t rf, int sh);
    mask_t m;
    int L = rf.size();
    int src;
    int unsigned b;
    for (int i = 0; i < L; i++) begin
      src = i - sh;
      b = (src >= 0 && src < L) ? rd[src] : 0;
      m.push_back(b != rf[i]);
    end
    return m;
  endfunction

  function automatic mask_t amend(mask_t m);
    mask_t a = m;
    int L = m.size();
    int i = 0;
    int j;
    while (i < L) begin
      if (m[i] == 0) begin
        j = i;
        while (j < L && m[j] == 0) j++;
        // zero run i..j-1
        if (i > 0 && j < L && (j - i) <= 2)
          for (int k = i; k < j; k++) a[k] = 1;
        i = j;
      end else i++;
    end
    return a;
  endfunction

  function automatic int count_edits(mask_t m);
    int e = 0;
    int L = m.size();
    bit [3:0] w;
    for (int i = 0; i < L; i += 4) begin
      for (int k = 0; k < 4; k++) w[3-k] = (i + k < L) ? m[i+k] : 1'b0;
      if (w == 4'b0000) e += 0;
      else if (w inside {4'b0101, 4'b0110, 4'b1001, 4'b1010, 4'b1011, 4'b1101}) e += 2;
      else e += 1;
    end
    return e;
  endfunction

  function automatic int ones(mask_t m);
    int n = 0;
    foreach (m[i]) n += m[i];
    return n;
  endfunction

  typedef struct {
    bit pass;
    bit ham_pass;
    bit indel_pass;
    int ham;
    int edits;
  } result_t;

  function automatic result_t filter(seq_t rd, seq_t rf, int E);
    result_t r;
    mask_t fin, am;
    int L = rf.size();
    r.ham = ones(mask_of(rd, rf, 0));
    fin = amend(mask_of(rd, rf, 0));
    for (int s = 1; s <= E; s++) begin
      am = amend(mask_of(rd, rf, s));
      foreach (fin[i]) fin[i] &= am[i];
      am = amend(mask_of(rd, rf, -s));
      foreach (fin[i]) fin[i] &= am[i];
    end
    r.edits      = count_edits(fin);
    r.ham_pass   = (r.ham <= E);
    r.indel_pass = (r.edits <= E);
    r.pass       = r.ham_pass | r.indel_pass;
    return r;
  endfunction

endpackage
