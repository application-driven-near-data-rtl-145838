// ssam_tb_pkg: programs and reference models shared by the processing-unit testbenches.
//
// knn_program builds a linear kNN search in the unit's instruction set. It reads its parameters
// from scratchpad words PARAM_BASE.. (DRAM base address of the dataset, number of vectors,
// dimensions, k, metric), finds each data vector's distance to the query held at scratchpad
// address 0, and inserts (vector number, distance) into the hardware priority queue. It then
// writes the k nearest ids to scratchpad RES_ID.. and their distances to RES_VAL... Metric 0 is
// squared Euclidean distance, metric 1 Hamming distance with FXP (32 binary dimensions per
// word), metric 2 Manhattan distance. Every inner-loop step prefetches PF_LINES lines ahead
// with MEM_FETCH. A short stack prologue pushes and pops the loop bounds, as index traversal
// code would.
package ssam_tb_pkg;
  import ssam_pkg::*;

  localparam int PARAM_BASE = 2000;
  localparam int RES_ID     = 1024;
  localparam int RES_VAL    = 1100;

  function automatic void knn_program(int vlen, int pf_lines, ref word_t prog[$]);
    int l_vec, l_dim, l_out, l_e, l_join;
    prog.delete();
    // r1 data ptr, r2 id, r3 N, r4 D, r5 j, r7 dsts, r8/r10/r11 tmp, r9 k, r12 metric
    prog.push_back(enc(OP_LOAD, 0, 1, 0, PARAM_BASE + 0));
    prog.push_back(enc(OP_LOAD, 0, 3, 0, PARAM_BASE + 1));
    prog.push_back(enc(OP_LOAD, 0, 4, 0, PARAM_BASE + 2));
    prog.push_back(enc(OP_LOAD, 0, 9, 0, PARAM_BASE + 3));
    prog.push_back(enc(OP_LOAD, 0, 12, 0, PARAM_BASE + 4));
    prog.push_back(enc(OP_PQ_RESET, 0, 0, 0, 0));
    prog.push_back(enc(OP_PUSH, 0, 0, 3, 0));
    prog.push_back(enc(OP_PUSH, 0, 0, 4, 0));
    prog.push_back(enc(OP_POP, 0, 4, 0, 0));
    prog.push_back(enc(OP_POP, 0, 3, 0, 0));
    prog.push_back(enc(OP_ADDI, 0, 2, 0, 0));
    prog.push_back(enc(OP_ADDI, 0, 13, 0, 1));          // r13 = 1
    prog.push_back(enc(OP_ADDI, 0, 14, 0, 2));          // r14 = 2
    l_vec = prog.size();
    prog.push_back(enc_r(OP_XOR, 1, 0, 0, 0));          // v0 = 0
    prog.push_back(enc(OP_ADDI, 0, 5, 0, 0));
    l_dim = prog.size();
    prog.push_back(enc_r(OP_ADD, 0, 8, 1, 5));          // r8 = data + j
    prog.push_back(enc(OP_MEM_FETCH, 0, 0, 8, pf_lines * vlen));
    prog.push_back(enc(OP_LOAD, 1, 1, 8, 0));           // v1 = data line
    prog.push_back(enc(OP_LOAD, 1, 2, 5, 0));           // v2 = query line
    // metric dispatch: 0 Euclid, 1 Hamming, 2 Manhattan
    prog.push_back(enc(OP_BE, 0, 12, 13, 6));           // metric == 1 -> hamming
    prog.push_back(enc_r(OP_SUB, 1, 3, 1, 2));
    prog.push_back(enc(OP_BE, 0, 12, 14, 6));           // metric == 2 -> manhattan
    prog.push_back(enc_r(OP_MULT, 1, 3, 3, 3));
    prog.push_back(enc_r(OP_ADD, 1, 0, 0, 3));
    prog.push_back(enc(OP_J, 0, 0, 0, 0));              // patched: to join
    l_e = prog.size() - 1;
    prog.push_back(enc_r(OP_FXP, 1, 0, 1, 2));          // v0 += popcount(v1 ^ v2)
    prog.push_back(enc(OP_J, 0, 0, 0, 0));              // patched: to join
    // manhattan: |x| = (x ^ (x >>> 31)) - (x >>> 31)
    prog.push_back(enc_r(OP_XOR, 1, 4, 4, 4));
    prog.push_back(enc(OP_ADDI, 1, 4, 4, 31));          // v4 = 31 in all lanes
    prog.push_back(enc_r(OP_SRA, 1, 5, 3, 4));          // v5 = sign mask
    prog.push_back(enc_r(OP_XOR, 1, 3, 3, 5));
    prog.push_back(enc_r(OP_SUB, 1, 3, 3, 5));
    prog.push_back(enc_r(OP_ADD, 1, 0, 0, 3));
    l_join = prog.size();
    prog[l_e]     = enc(OP_J, 0, 0, 0, l_join);
    prog[l_e + 2] = enc(OP_J, 0, 0, 0, l_join);
    prog.push_back(enc(OP_ADDI, 0, 5, 5, vlen));
    prog.push_back(enc(OP_BLT, 0, 5, 4, l_dim - prog.size()));
    // reduce lanes
    prog.push_back(enc(OP_VSMOVE, 1, 7, 0, 0));
    for (int l = 1; l < vlen; l++) begin
      prog.push_back(enc(OP_VSMOVE, 1, 10, 0, l));
      prog.push_back(enc_r(OP_ADD, 0, 7, 7, 10));
    end
    prog.push_back(enc_r(OP_PQ_INSERT, 0, 0, 2, 7));
    prog.push_back(enc_r(OP_ADD, 0, 1, 1, 4));
    prog.push_back(enc(OP_ADDI, 0, 2, 2, 1));
    prog.push_back(enc(OP_BLT, 0, 2, 3, l_vec - prog.size()));
    // read out the k nearest
    prog.push_back(enc(OP_ADDI, 0, 5, 0, 0));
    l_out = prog.size();
    prog.push_back(enc(OP_PQ_LOAD, 0, 8, 5, 0));
    prog.push_back(enc(OP_STORE, 0, 8, 5, RES_ID));
    prog.push_back(enc(OP_PQ_LOAD, 0, 10, 5, 1));
    prog.push_back(enc(OP_STORE, 0, 10, 5, RES_VAL));
    prog.push_back(enc(OP_ADDI, 0, 5, 5, 1));
    prog.push_back(enc(OP_BLT, 0, 5, 9, l_out - prog.size()));
    prog.push_back(enc(OP_HALT, 0, 0, 0, 0));
  endfunction

  // Deterministic test data: dimension d of vector n, seeded.
  function automatic word_t data_word(int seed, int n, int d, int metric);
    int unsigned h;
    h = (seed * 32'h9E3779B1) ^ (n * 32'h85EBCA77) ^ (d * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return (metric == 1) ? word_t'(h) : word_t'(h % 200);
  endfunction

  function automatic word_t distance(int metric, word_t a[], word_t b[]);
    word_t s;
    s = 0;
    foreach (a[i]) begin
      int signed x;
      x = int'(a[i]) - int'(b[i]);
      case (metric)
        1:       s += $countones(a[i] ^ b[i]);
        2:       s += (x < 0) ? -x : x;
        default: s += x * x;
      endcase
    end
    return s;
  endfunction

  // k nearest of dsts[] in the queue's order: by distance, ties by insertion order.
  function automatic void topk(word_t dsts[], int k, ref int ids[$]);
    int idx[$];
    ids.delete();
    for (int i = 0; i < dsts.size(); i++) idx.push_back(i);
    for (int i = 1; i < idx.size(); i++) begin
      int j, t;
      j = i; t = idx[i];
      while (j > 0 && dsts[idx[j-1]] > dsts[t]) begin idx[j] = idx[j-1]; j--; end
      idx[j] = t;
    end
    for (int i = 0; i < k && i < idx.size(); i++) ids.push_back(idx[i]);
  endfunction

endpackage
