// tb_asmcap_ref_pkg -- reference model used by the ASMCap testbenches.
//
// Sequences are queues of 2-bit base codes, base 0 leftmost. mis_count()
// gives the number of mismatched cells of a row: for each reference base i,
// ED* counts it as mismatched when none of read bases i-1, i, i+1 (those that
// exist) equals it; HD counts it when read base i differs. rotate() rotates a
// read right (base j -> j+1) or left. str2seq() turns an "ACGT" string into
// codes. lfsr_next() is the 16-bit Galois LFSR step x^16+x^14+x^13+x^11+1.
package tb_asmcap_ref_pkg;
  typedef logic [1:0] b2_t;
  typedef b2_t seq_t[$];

  function automatic b2_t ch2b(byte c);
    case (c)
      "A": return 2'd0;
      "C": return 2'd1;
      "G": return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  function automatic seq_t str2seq(string s);
    seq_t q;
    for (int i = 0; i < s.len(); i++) q.push_back(ch2b(s[i]));
    return q;
  endfunction

  function automatic int mis_count(seq_t ref_s, seq_t rd, bit eds);
    int n = 0;
    for (int i = 0; i < ref_s.size(); i++) begin
      bit m = (rd[i] == ref_s[i]);
      if (eds) begin
        if (i > 0 && rd[i-1] == ref_s[i]) m = 1;
        if (i < ref_s.size() - 1 && rd[i+1] == ref_s[i]) m = 1;
      end
      if (!m) n++;
    end
    return n;
  endfunction

  function automatic seq_t rotate(seq_t rd, bit left);
    seq_t q = rd;
    if (left) begin
      b2_t f = q.pop_front();
      q.push_back(f);
    end else begin
      b2_t b = q.pop_back();
      q.push_front(b);
    end
    return q;
  endfunction

  function automatic logic [15:0] lfsr_next(logic [15:0] x);
    return x[0] ? ((x >> 1) ^ 16'hB400) : (x >> 1);
  endfunction

  function automatic seq_t rand_seq(int n);
    seq_t q;
    for (int i = 0; i < n; i++) q.push_back(b2_t'($urandom_range(0, 3)));
    return q;
  endfunction
endpackage
