// tb_ref_pkg: reference model of a binary 1-D CNN layer for the testbenches.
//
// Works on positions, not on memory words, so it is independent of the
// hardware's word streaming: a feature map is a queue of positions, each a
// 128-bit vector of channel bits. conv() applies one layer the way the
// processor defines it: kernel taps k = 1024/chn_in, tap j and channel c
// multiply wordline j*chn_in + c, a weight bit 1 means +1 and 0 means -1,
// activation 1 means +1 and 0 means 0, and the output bit is 1 when the
// positive popcount is at least the negative one. maxpool() ORs groups of
// `p` positions, dropping an unfinished group. The pack/unpack helpers give
// the 32-bit word layout used in the feature-map SRAM.
package tb_ref_pkg;
  typedef logic [127:0]  pos_t;
  typedef logic [1023:0] col_t;

  function automatic void conv(input pos_t ifm[$], input int chn_in, input int s,
                               input int p, input int d, input col_t w[$],
                               input int chn_out, output pos_t ofm[$]);
    int k, L, n;
    col_t a;
    k = 1024 / chn_in;
    L = ifm.size();
    n = (L + 2 * p - d * (k - 1) - 1) / s + 1;
    ofm.delete();
    for (int t = 0; t < n; t++) begin
      pos_t o;
      a = '0;
      for (int j = 0; j < k; j++) begin
        int x;
        x = t * s - p + j * d;
        if (x >= 0 && x < L)
          for (int c = 0; c < chn_in; c++) a[j * chn_in + c] = ifm[x][c];
      end
      o = '0;
      for (int oc = 0; oc < chn_out; oc++)
        o[oc] = ($countones(a & w[oc]) >= $countones(a & ~w[oc]));
      ofm.push_back(o);
    end
  endfunction

  function automatic void maxpool(input pos_t ifm[$], input int p, output pos_t ofm[$]);
    ofm.delete();
    for (int g = 0; g + p <= ifm.size(); g += p) begin
      pos_t o;
      o = '0;
      for (int i = 0; i < p; i++) o |= ifm[g + i];
      ofm.push_back(o);
    end
  endfunction

  // positions -> 32-bit words (chn 8: four positions per word, first in bits 7:0)
  function automatic void pack(input pos_t f[$], input int chn, output logic [31:0] w[$]);
    w.delete();
    if (chn == 8) begin
      for (int i = 0; i < f.size(); i += 4) begin
        logic [31:0] x;
        x = '0;
        for (int q = 0; q < 4; q++) if (i + q < f.size()) x[8*q +: 8] = f[i + q][7:0];
        w.push_back(x);
      end
    end else begin
      foreach (f[i]) for (int u = 0; u < chn / 32; u++) w.push_back(f[i][32*u +: 32]);
    end
  endfunction
endpackage
