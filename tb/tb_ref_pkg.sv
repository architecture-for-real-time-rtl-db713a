// tb_ref_pkg: reference model used by the sorter testbenches.
//
// ref_sort orders a list of 48-bit frames by the 8-bit time stamp in bits
// 23:16, ascending. Frames with equal stamps are put in the reverse of
// their order in the list, which is what the counting sort with a
// decrementing position counter produces. It is written as a plain
// selection over key values, independent of the hardware's counters.
package tb_ref_pkg;
  typedef logic [47:0] frame_t;
  typedef frame_t frame_q_t[$];

  function automatic logic [7:0] ts_of(frame_t f);
    return f[23:16];
  endfunction

  function automatic frame_q_t ref_sort(frame_q_t in);
    frame_q_t out;
    for (int k = 0; k < 256; k++)
      for (int i = in.size() - 1; i >= 0; i--)
        if (ts_of(in[i]) == 8'(k)) out.push_back(in[i]);
    return out;
  endfunction

  // A random frame with the given stamp; the payload fields are random.
  function automatic frame_t mk_frame(logic [7:0] ts);
    frame_t f;
    f = {16'($urandom()), $urandom()};
    f[23:16] = ts;
    return f;
  endfunction
endpackage
