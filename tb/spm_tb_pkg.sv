// spm_tb_pkg: stimulus generation and reference model for the testbenches.
//
// Documents and queries are generated as sorted lists of unique keys with
// random values; the dataset is the flat list of 32-bit items that would be
// stored in flash (a pattern identifier followed by the document's key/value
// items). The reference model computes, independently of the RTL, the dot
// product of each document with the query by a plain search of the query
// for each document key, and the number of key comparisons and skipped
// items that the merge in the key comparator must make, the squared norm
// of each document, and the threshold decision in both modes.
package spm_tb_pkg;
  import spm_pkg::*;

  typedef struct {
    int unsigned key;
    int unsigned val;
  } kvi_t;

  typedef struct {
    int unsigned pid;
    int unsigned score;
    int unsigned npp;
  } ref_doc_t;

  // Sorted unique keys starting at or above base, gaps of 1..maxgap.
  function automatic void gen_list(ref kvi_t l[$], input int n,
                                   input int unsigned maxgap, input int unsigned base);
    int unsigned k;
    l.delete();
    k = base + $urandom_range(0, maxgap);
    for (int i = 0; i < n; i++) begin
      kvi_t e;
      e.key = k;
      e.val = $urandom_range(1, 255);
      l.push_back(e);
      k += 1 + $urandom_range(0, maxgap - 1);
    end
  endfunction

  function automatic word_t pid_word(int unsigned pid);
    return {1'b1, 31'(pid)};
  endfunction

  function automatic word_t kv_word(kvi_t e);
    return {1'b0, 23'(e.key), 8'(e.val)};
  endfunction

  // Dot product, partial product count and squared document norm by
  // direct lookup.
  function automatic void ref_score(ref kvi_t q[$], ref kvi_t d[$],
                                    output int unsigned score, output int unsigned npp,
                                    output int unsigned norm2);
    score = 0;
    npp   = 0;
    norm2 = 0;
    foreach (d[i]) norm2 += d[i].val * d[i].val;
    foreach (d[i])
      foreach (q[j])
        if (q[j].key == d[i].key) begin
          score += q[j].val * d[i].val;
          npp++;
        end
  endfunction

  // Squared norm of the query.
  function automatic longint unsigned qnorm2(ref kvi_t q[$]);
    qnorm2 = 0;
    foreach (q[i]) qnorm2 += q[i].val * q[i].val;
  endfunction

  // Host-side cosine constant C = t^2 |A|^2 2^COS_FRAC.
  function automatic logic [63:0] cos_const(real t, longint unsigned qn2);
    return 64'(longint'(t * t * real'(qn2) * real'(1 << COS_FRAC)));
  endfunction

  // Threshold decision: score >= thr, or in cosine mode
  // score^2 * 2^COS_FRAC >= C * |B|^2.
  function automatic bit ref_pass(int unsigned score, int unsigned norm2, bit cos_mode,
                                  int unsigned thr, logic [63:0] c);
    logic [127:0] l, r;
    if (!cos_mode) return score >= thr;
    l = (128'(score) * 128'(score)) << COS_FRAC;
    r = 128'(c) * 128'(norm2);
    return l >= r;
  endfunction

  // Work the merge must do on one document: key comparisons and items
  // skipped after the query is exhausted.
  function automatic void ref_work(ref kvi_t q[$], ref kvi_t d[$],
                                   output int unsigned cmps, output int unsigned skips);
    int i, j;
    i = 0; j = 0; cmps = 0; skips = 0;
    while (i < d.size()) begin
      if (j >= q.size()) begin
        skips++; i++;
      end else begin
        cmps++;
        if (d[i].key > q[j].key) j++;
        else i++;
      end
    end
  endfunction

  // One run: ndocs random documents against query q. Produces the flat item
  // list, the 512-bit beats that carry it (item 0 in bits 31:0, unused items
  // of the last beat random), the result records a kernel must send for the
  // given threshold (dot-product or cosine mode), and the merge steps (one per identifier, comparison or
  // skipped item) the run needs. maxlen bounds the document length.
  function automatic void build_run(ref kvi_t q[$], input int ndocs, input int maxlen,
                                    input int unsigned threshold, input bit cos_mode,
                                    input logic [63:0] cos_c, input int unsigned pid0,
                                    ref word_t words[$], ref logic [DATA_IN_W-1:0] beats[$],
                                    ref result_rec_t recs[$], output int unsigned steps,
                                    output int unsigned n_match_docs);
    int unsigned n_pass, n_pp, maxkey;
    words.delete();
    beats.delete();
    recs.delete();
    steps = 0; n_pass = 0; n_pp = 0; n_match_docs = 0;
    maxkey = (q.size() > 0) ? q[q.size()-1].key : 100;
    for (int dd = 0; dd < ndocs; dd++) begin
      kvi_t d[$];
      int unsigned sc, np, n2, c, sk, len, gap;
      len = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(1, maxlen);
      gap = (len == 0) ? 1 : (maxkey + 20) / len + 1;
      gen_list(d, len, gap, 0);
      words.push_back(pid_word(pid0 + dd));
      foreach (d[i]) words.push_back(kv_word(d[i]));
      ref_score(q, d, sc, np, n2);
      ref_work(q, d, c, sk);
      steps += 1 + c + sk;
      n_pp  += np;
      if (np > 0) n_match_docs++;
      if (ref_pass(sc, n2, cos_mode, threshold, cos_c)) begin
        n_pass++;
        recs.push_back('{REC_DOC, 24'(np), {1'b0, 31'(pid0 + dd)}, sc, n2});
      end
    end
    recs.push_back('{REC_DONE, 24'd0, ndocs, n_pass, n_pp});
    for (int i = 0; i < words.size(); i += DATA_IN_W / WORD_W) begin
      logic [DATA_IN_W-1:0] b;
      for (int j = 0; j < DATA_IN_W / WORD_W; j++)
        b[j*WORD_W +: WORD_W] = (i + j < words.size()) ? words[i + j] : word_t'($urandom);
      beats.push_back(b);
    end
  endfunction

  function automatic logic [CMD_W-1:0] mk_cmd(cmd_op_e op, logic [31:0] a, logic [31:0] b);
    cmd_t c;
    c = '0;
    c.op = op;
    c.a  = a;
    c.b  = b;
    return c;
  endfunction

endpackage
