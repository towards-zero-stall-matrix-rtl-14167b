// Testbench helpers: a reference model of an frep.o loop nest.
//
// A nest of up to three loops follows the template
//   frep L0 { pre0; frep L1 { pre1; frep L2 { pre2; body; post2 } post1 } post0 }
// where levels beyond n_levels are absent. Every body instruction gets a
// static id in program order; static_program() lists what the core offloads (FREPs
// as id -1 - level), expected() the order the FPU must see the ids in.
//
// The nest template (instructions before an inner loop, the inner loop,
// instructions after it) is the paper's; the instruction numbering is this
// package's.
package zonl_tb_pkg;

  typedef struct {
    int n_levels;
    int pre  [3];
    int post [3];
    int iters[3];
    int body;
  } nest_t;

  // number of static instructions inside level k (its body length)
  function automatic int body_len(nest_t n, int k);
    int len = n.body;
    for (int j = n.n_levels - 1; j >= k; j--) len += n.pre[j] + n.post[j];
    return len;
  endfunction

  // static program: FREP of level k is -1-k, instructions are ids 0..
  function automatic void static_program(nest_t n, ref int prog[$]);
    int id = 0;
    prog.delete();
    for (int k = 0; k < n.n_levels; k++) begin
      prog.push_back(-1 - k);
      for (int i = 0; i < n.pre[k]; i++) prog.push_back(id++);
    end
    for (int i = 0; i < n.body; i++) prog.push_back(id++);
    for (int k = n.n_levels - 1; k >= 0; k--)
      for (int i = 0; i < n.post[k]; i++) prog.push_back(id++);
  endfunction

  // dynamic order of ids, by plain nested loops (absent levels: 1 iteration)
  function automatic void expected(nest_t n, ref int seq[$]);
    int pre_base[3], post_base[3], body_base, id, it[3];
    id = 0;
    for (int k = 0; k < 3; k++) begin
      pre_base[k] = id;
      if (k < n.n_levels) id += n.pre[k];
    end
    body_base = id;
    id += n.body;
    for (int k = 2; k >= 0; k--) begin
      post_base[k] = id;
      if (k < n.n_levels) id += n.post[k];
    end
    for (int k = 0; k < 3; k++) it[k] = (k < n.n_levels) ? n.iters[k] : 1;
    seq.delete();
    for (int a = 0; a < it[0]; a++) begin
      if (n.n_levels > 0) for (int i = 0; i < n.pre[0]; i++) seq.push_back(pre_base[0] + i);
      for (int b = 0; b < it[1]; b++) begin
        if (n.n_levels > 1) for (int i = 0; i < n.pre[1]; i++) seq.push_back(pre_base[1] + i);
        for (int c = 0; c < it[2]; c++) begin
          if (n.n_levels > 2) for (int i = 0; i < n.pre[2]; i++) seq.push_back(pre_base[2] + i);
          for (int i = 0; i < n.body; i++) seq.push_back(body_base + i);
          if (n.n_levels > 2) for (int i = 0; i < n.post[2]; i++) seq.push_back(post_base[2] + i);
        end
        if (n.n_levels > 1) for (int i = 0; i < n.post[1]; i++) seq.push_back(post_base[1] + i);
      end
      if (n.n_levels > 0) for (int i = 0; i < n.post[0]; i++) seq.push_back(post_base[0] + i);
    end
  endfunction

  // a random nest that fits a ring buffer of rb_depth entries
  function automatic nest_t random_nest(int rb_depth);
    nest_t n;
    do begin
      n.n_levels = 1 + $urandom_range(2);
      for (int k = 0; k < 3; k++) begin
        n.pre[k]   = ($urandom_range(2) == 0) ? 0 : $urandom_range(3);
        n.post[k]  = ($urandom_range(2) == 0) ? 0 : $urandom_range(3);
        n.iters[k] = 1 + $urandom_range(3);
      end
      n.body = 1 + $urandom_range(3);
    end while (body_len(n, 0) > rb_depth);
    return n;
  endfunction

endpackage
