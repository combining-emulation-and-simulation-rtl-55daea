// kvl_tb_pkg: shared testbench support for the lookup engine: a sparse model
// of memory contents (128-bit beats, addressed by byte address), a reference
// implementation of the key hash, a builder that fills an open-addressing hash
// table with linear probing, and the reference lookup used to compute the
// expected value of every query.
package kvl_tb_pkg;

  logic [127:0] store [longint unsigned];

  function automatic void mem_wr(longint unsigned addr, logic [127:0] d);
    store[addr >> 4] = d;
  endfunction

  function automatic logic [127:0] mem_rd(longint unsigned addr);
    if (store.exists(addr >> 4)) return store[addr >> 4];
    return '0;
  endfunction

  function automatic void mem_clear();
    store.delete();
  endfunction

  // Reference key hash: MurmurHash3 64-bit finaliser, written out step by step.
  function automatic logic [63:0] ref_hash(logic [63:0] k);
    logic [63:0] x;
    x = k;
    x ^= x >> 33;
    x *= 64'hff51afd7ed558ccd;
    x ^= x >> 33;
    x *= 64'hc4ceb9fe1a85ec53;
    x ^= x >> 33;
    return x;
  endfunction

  // Value stored with a key in the tables the testbenches build.
  function automatic logic [63:0] val_of(logic [63:0] k);
    return {k[31:0], k[63:32]} ^ 64'h0123_4567_89ab_cdef;
  endfunction

  // A random non-zero key (0 marks an empty table slot).
  function automatic logic [63:0] rand_key();
    logic [63:0] k;
    do k = {$urandom, $urandom}; while (k == 0 || k == '1);
    return k;
  endfunction

  // Fills a table of 2^log2n entries (16 B each: key low, value high) at
  // base with nins random keys by linear probing; returns the keys.
  function automatic void build_table(longint unsigned base, int log2n, int nins,
                                      ref logic [63:0] keys[$]);
    longint unsigned n = 64'd1 << log2n;
    keys.delete();
    for (longint unsigned i = 0; i < n; i++) mem_wr(base + 16*i, '0);
    for (int j = 0; j < nins; j++) begin
      logic [63:0] k;
      longint unsigned s;
      k = rand_key();
      s = ref_hash(k) & (n - 1);
      while (mem_rd(base + 16*s)[63:0] != 0) s = (s + 1) & (n - 1);
      mem_wr(base + 16*s, {val_of(k), k});
      keys.push_back(k);
    end
  endfunction

  // Expected engine output for key k: the first of psl entries from the
  // hashed slot (wrapping) whose key matches, else all ones.
  function automatic logic [63:0] ref_lookup(longint unsigned base, int log2n, int psl,
                                             logic [63:0] k);
    longint unsigned n = 64'd1 << log2n;
    longint unsigned s = ref_hash(k) & (n - 1);
    for (int p = 0; p < psl; p++) begin
      logic [127:0] e = mem_rd(base + 16*((s + p) & (n - 1)));
      if (e[63:0] == k) return e[127:64];
    end
    return '1;
  endfunction

  // Number of probes the reference lookup needs before the key is found
  // (psl+1 when not found within psl).
  function automatic int probe_dist(longint unsigned base, int log2n, int psl,
                                    logic [63:0] k);
    longint unsigned n = 64'd1 << log2n;
    longint unsigned s = ref_hash(k) & (n - 1);
    for (int p = 0; p < psl; p++)
      if (mem_rd(base + 16*((s + p) & (n - 1)))[63:0] == k) return p + 1;
    return psl + 1;
  endfunction

  // Writes a batch of 8-byte keys to memory at base (two keys per beat).
  function automatic void write_keys(longint unsigned base, input logic [63:0] q[$]);
    for (int i = 0; i < q.size(); i += 2) begin
      logic [63:0] hi = (i + 1 < q.size()) ? q[i+1] : 64'hdead_beef_dead_beef;
      mem_wr(base + 8*i, {hi, q[i]});
    end
  endfunction

endpackage
