// Reference helpers shared by the accelerator and system testbenches:
// HQC RM(1,7) encoding and SHAKE-stream rejection sampling, written
// independently of the RTL.
package hqc_model;
  // bit j of the RM(1,7) codeword of message m
  function automatic bit rm_bit(input logic [7:0] m, input int j);
    return m[7] ^ (^(m[6:0] & 7'(j)));
  endfunction

  // positions drawn from a SHAKE byte stream by the HQC rejection rule
  function automatic void sample_ref(input byte unsigned s [$], input int unsigned n,
                                     input int unsigned w, ref int unsigned pos [$]);
    int unsigned thr, v, p, j;
    bit dup;
    thr = ((1 << 24) / n) * n;
    j = 0;
    pos.delete();
    while (pos.size() < w && j + 3 <= s.size()) begin
      v = (32'(s[j]) << 16) | (32'(s[j+1]) << 8) | 32'(s[j+2]);
      j += 3;
      if (v >= thr) continue;
      p = v % n;
      dup = 1'b0;
      foreach (pos[k]) if (pos[k] == p) dup = 1'b1;
      if (!dup) pos.push_back(p);
    end
  endfunction
endpackage
