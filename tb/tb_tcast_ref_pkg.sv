// tb_tcast_ref_pkg: reference models used by the testbenches, written
// independently of the RTL.
//
//  * tensor_cast: the Tensor Casting step. It sorts the (src, dst) pairs by
//    src (stable bucket sort), takes the sorted dst as the casted src, and numbers the
//    distinct sorted src values 0,1,2,... as the casted dst (a scan for
//    changes followed by a cumulative sum, minus one). In the real system
//    this runs on the GPU during the forward pass.
//  * lane_add / rand_beat: 16-lane 32-bit beat arithmetic and random data.
//  * pack_pairs: packs index pairs into 64-byte beats, 8 pairs per beat,
//    pair k in bits [64k +: 64], src in the low 32 bits, dst in the high.
package tb_tcast_ref_pkg;
  import tcast_pkg::*;

  typedef int unsigned uarr_t [];

  function automatic void tensor_cast(input uarr_t src, input uarr_t dst,
                                      output uarr_t csrc, output uarr_t cdst,
                                      output uarr_t uniq_src);
    int n = src.size();
    int unsigned perm [] = new[n];
    int unsigned ssrc [] = new[n];
    int unsigned bucket [int unsigned][$];
    int k = 0;
    // stable sort by src: one bucket per src value, taken in ascending order
    for (int i = 0; i < n; i++) begin
      int unsigned v;
      v = src[i];
      bucket[v].push_back(i);
    end
    foreach (bucket[v]) begin
      int unsigned q [$];
      q = bucket[v];
      foreach (q[j]) begin
        perm[k] = q[j];
        k++;
      end
    end
    k = 0;
    csrc = new[n];
    cdst = new[n];
    for (int i = 0; i < n; i++) begin
      ssrc[i] = src[perm[i]];
      csrc[i] = dst[perm[i]];
    end
    uniq_src = new[n];
    for (int i = 0; i < n; i++) begin
      if (i == 0 || ssrc[i] != ssrc[i-1]) begin
        uniq_src[k] = ssrc[i];
        k++;
      end
      cdst[i] = k - 1;
    end
    uniq_src = new[k](uniq_src);
  endfunction

  function automatic beat_t pack_beat(input uarr_t src, input uarr_t dst, input int first);
    beat_t b = '0;
    for (int k = 0; k < PAIRS_PER_BEAT; k++) begin
      if (first + k < src.size()) begin
        b[k*2*ID_W +: ID_W]        = src[first+k];
        b[k*2*ID_W + ID_W +: ID_W] = dst[first+k];
      end
    end
    return b;
  endfunction

  function automatic beat_t lane_add(beat_t a, beat_t b);
    beat_t s;
    for (int l = 0; l < LANES; l++) s[l*ELEM_W +: ELEM_W] = a[l*ELEM_W +: ELEM_W] + b[l*ELEM_W +: ELEM_W];
    return s;
  endfunction

  function automatic beat_t rand_beat(int unsigned mask);
    beat_t b;
    for (int l = 0; l < LANES; l++) b[l*ELEM_W +: ELEM_W] = $urandom() & mask;
    return b;
  endfunction

endpackage
