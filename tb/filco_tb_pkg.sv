// filco_tb_pkg: program builder and reference model for FILCO testbenches.
//
// A testbench describes matrix multiplications C = A x B as jobs (which CU,
// which FMUs and buffers hold A, B and C, where the matrices sit in
// off-chip memory, and the AIE loop bounds). The builder turns jobs into
// per-unit operation lists exactly as a compiler for this hardware would:
//   loader:  A tile -> FMU fa, B tile -> FMU fb
//   FMU fa/fb: receive from the loader, then send one tile view per CU step
//   CU:      for each output tile (alternating buffer sets) and each k step:
//            LOAD_LHS, LOAD_RHS, COMPUTE (acc for k > 0); then STORE
//   FMU fc:  scatter each stored CU tile into its view, then send all of C
//   storer:  C -> off-chip memory
// Adjacent operations on different buffers of one unit are merged into one
// ping/pong instruction when the fields allow it, so loads overlap compute.
// The program is emitted round-robin over the units, two instructions per
// packet, with is_last on each unit's final instruction and on the final
// header.
package filco_tb_pkg;
  import filco_pkg::*;

  typedef struct {
    int      buff;
    fmu_op_e op;
    int      cu;
    int      count;
    int      sr, er, sc, ec, ld;
  } fop_t;

  typedef struct {
    int     set;
    cu_op_e op;
    int     fmu;          // src for loads, des for store
    int     count;
    int     bi, bk, bj;
    bit     acc;
  } cop_t;

  typedef struct {
    longint addr;         // byte address of element (0,0)
    int     rows, cols;   // full matrix in off-chip memory
    int     r0, c0;       // corner of the operand inside it
  } dmat_t;

  function automatic iword_t enc_iom(bit last, dmat_t d, int fmu, int nr, int nc);
    iom_instr_t i;
    i = '0;
    i.is_last = last; i.ddr_addr = 32'(d.addr); i.fmu = unit_t'(fmu);
    i.m = dim_t'(d.rows); i.n = dim_t'(d.cols);
    i.start_row = dim_t'(d.r0); i.end_row = dim_t'(d.r0 + nr);
    i.start_col = dim_t'(d.c0); i.end_col = dim_t'(d.c0 + nc);
    return iword_t'(i);
  endfunction

  class prog_builder;
    int n_fmu, n_cu, k_aie;
    fop_t  fops [][$];
    cop_t  cops [][$];
    iword_t ld_list[$], st_list[$];
    iword_t prog[$];
    int    n_merged_fmu, n_merged_cu;

    function new(int n_fmu, int n_cu, int k_aie);
      this.n_fmu = n_fmu; this.n_cu = n_cu; this.k_aie = k_aie;
      fops = new[n_fmu];
      cops = new[n_cu];
    endfunction

    // C(M x N) = A(M x Kd) x B(Kd x N) on one CU.
    function void add_job(int cu, int fa, int ba, int fb, int bb, int fc, int bc,
                          dmat_t da, dmat_t db, dmat_t dc, int m, int kd, int n,
                          int bi, int bk, int bj);
      int ti_n = 2*bi, tk_n = 8*bk, tj_n = 8*bj*k_aie;
      int set = 0;
      fop_t f; cop_t c;
      ld_list.push_back(enc_iom(0, da, fa, m, kd));
      f = '{buff: ba, op: FMU_RECV_IOM, cu: 0, count: m*kd, sr: 0, er: 0, sc: 0, ec: 0, ld: 0};
      fops[fa].push_back(f);
      ld_list.push_back(enc_iom(0, db, fb, kd, n));
      f.buff = bb; f.count = kd*n;
      fops[fb].push_back(f);
      for (int ti = 0; ti < m; ti += ti_n)
        for (int tj = 0; tj < n; tj += tj_n) begin
          for (int tk = 0; tk < kd; tk += tk_n) begin
            f = '{buff: ba, op: FMU_SEND_CU, cu: cu, count: 0, sr: ti, er: ti+ti_n, sc: tk, ec: tk+tk_n, ld: kd};
            fops[fa].push_back(f);
            f = '{buff: bb, op: FMU_SEND_CU, cu: cu, count: 0, sr: tk, er: tk+tk_n, sc: tj, ec: tj+tj_n, ld: n};
            fops[fb].push_back(f);
            c = '{set: set, op: CU_LOAD_LHS, fmu: fa, count: ti_n*tk_n, bi: bi, bk: bk, bj: bj, acc: 0};
            cops[cu].push_back(c);
            c.op = CU_LOAD_RHS; c.fmu = fb; c.count = tk_n*tj_n;
            cops[cu].push_back(c);
            c.op = CU_COMPUTE; c.fmu = 0; c.count = 0; c.acc = (tk != 0);
            cops[cu].push_back(c);
          end
          c = '{set: set, op: CU_STORE, fmu: fc, count: 0, bi: bi, bk: bk, bj: bj, acc: 0};
          cops[cu].push_back(c);
          f = '{buff: bc, op: FMU_RECV_CU, cu: cu, count: 0, sr: ti, er: ti+ti_n, sc: tj, ec: tj+tj_n, ld: n};
          fops[fc].push_back(f);
          set ^= 1;
        end
      f = '{buff: bc, op: FMU_SEND_IOM, cu: 0, count: m*n, sr: 0, er: 0, sc: 0, ec: 0, ld: 0};
      fops[fc].push_back(f);
      st_list.push_back(enc_iom(0, dc, fc, m, n));
    endfunction

    static function bit fop_tile(fmu_op_e o);
      return o == FMU_SEND_CU || o == FMU_RECV_CU;
    endfunction

    function iword_t enc_fmu(fop_t a, fop_t b, bit two, bit last);
      fmu_instr_t i;
      fop_t t, q;
      i = '0;
      i.ping_op = FMU_NOP; i.pong_op = FMU_NOP;
      if (a.buff == 0) i.ping_op = a.op; else i.pong_op = a.op;
      if (two) begin
        if (b.buff == 0) i.ping_op = b.op; else i.pong_op = b.op;
      end
      t = fop_tile(a.op) ? a : b;     // the op that uses the tile fields
      q = fop_tile(a.op) ? b : a;     // the op that uses count
      if (!two) begin t = a; q = a; end
      i.is_last = last;
      i.count = count_t'(q.count);
      i.src_cu = unit_t'(t.cu); i.des_cu = unit_t'(t.cu);
      i.start_row = dim_t'(t.sr); i.end_row = dim_t'(t.er);
      i.start_col = dim_t'(t.sc); i.end_col = dim_t'(t.ec); i.ld = dim_t'(t.ld);
      return iword_t'(i);
    endfunction

    function iword_t enc_cu(cop_t a, cop_t b, bit two, bit last);
      cu_instr_t i;
      i = '0;
      i.ping_op = CU_NOP; i.pong_op = CU_NOP;
      if (a.set == 0) i.ping_op = a.op; else i.pong_op = a.op;
      if (two) begin
        if (b.set == 0) i.ping_op = b.op; else i.pong_op = b.op;
      end
      i.is_last = last;
      i.bound_i = 5'(a.bi); i.bound_k = 3'(a.bk); i.bound_j = 3'(a.bj);
      if (a.op inside {CU_LOAD_LHS, CU_LOAD_RHS}) begin i.src_fmu = unit_t'(a.fmu); i.count = count_t'(a.count); end
      if (two && b.op inside {CU_LOAD_LHS, CU_LOAD_RHS}) begin i.src_fmu = unit_t'(b.fmu); i.count = count_t'(b.count); end
      if (a.op == CU_STORE) i.des_fmu = unit_t'(a.fmu);
      if (two && b.op == CU_STORE) i.des_fmu = unit_t'(b.fmu);
      if (a.op == CU_COMPUTE) i.acc = a.acc;
      if (two && b.op == CU_COMPUTE) i.acc = b.acc;
      return iword_t'(i);
    endfunction

    // Merge adjacent ops into ping/pong pairs and emit the whole program.
    function void build();
      iword_t ulist [][$];
      int nu = 2 + n_fmu + n_cu;
      int maxlen, chunk;
      ulist = new[nu];
      foreach (ld_list[x]) ulist[0].push_back(ld_list[x]);
      foreach (st_list[x]) ulist[1].push_back(st_list[x]);
      for (int f = 0; f < n_fmu; f++) begin
        int x = 0;
        while (x < fops[f].size()) begin
          bit two = 0;
          if (x + 1 < fops[f].size()) begin
            fop_t a = fops[f][x], b = fops[f][x+1];
            two = (a.buff != b.buff) && (a.op != b.op) && (fop_tile(a.op) != fop_tile(b.op));
          end
          ulist[2+f].push_back(enc_fmu(fops[f][x], two ? fops[f][x+1] : fops[f][x], two, 0));
          if (two) n_merged_fmu++;
          x += two ? 2 : 1;
        end
      end
      for (int c = 0; c < n_cu; c++) begin
        int x = 0;
        while (x < cops[c].size()) begin
          bit two = 0;
          if (x + 1 < cops[c].size()) begin
            cop_t a = cops[c][x], b = cops[c][x+1];
            bit al = a.op inside {CU_LOAD_LHS, CU_LOAD_RHS};
            bit bl = b.op inside {CU_LOAD_LHS, CU_LOAD_RHS};
            two = (a.set != b.set) && !(al && bl) && (a.op != b.op) &&
                  a.bi == b.bi && a.bk == b.bk && a.bj == b.bj;
          end
          ulist[2+n_fmu+c].push_back(enc_cu(cops[c][x], two ? cops[c][x+1] : cops[c][x], two, 0));
          if (two) n_merged_cu++;
          x += two ? 2 : 1;
        end
      end
      // every unit ends with an is_last instruction (a no-op if it has none)
      for (int u = 0; u < nu; u++) begin
        if (ulist[u].size() == 0) ulist[u].push_back('0);  // NOP / empty tile
        ulist[u][ulist[u].size()-1][u < 2 ? $bits(iom_instr_t)-1 :
                                     u < 2 + n_fmu ? $bits(fmu_instr_t)-1 : $bits(cu_instr_t)-1] = 1'b1;
      end
      maxlen = 0;
      foreach (ulist[u]) if (ulist[u].size() > maxlen) maxlen = ulist[u].size();
      chunk = 2;
      prog.delete();
      for (int r = 0; r < maxlen; r += chunk)
        for (int u = 0; u < nu; u++) begin
          int n = ulist[u].size() - r;
          ig_hdr_t h;
          if (n <= 0) continue;
          if (n > chunk) n = chunk;
          h = '{is_last: 1'b0, des_unit: unit_t'(u), valid_length: count_t'(n)};
          prog.push_back(iword_t'(h));
          for (int x = 0; x < n; x++) prog.push_back(ulist[u][r+x]);
        end
      begin
        ig_hdr_t h;
        h = '{is_last: 1'b1, des_unit: '0, valid_length: '0};
        prog.push_back(iword_t'(h));
      end
    endfunction
  endclass

  // Deterministic test value of element (r, c) of matrix `id`: small
  // signed numbers so that products and sums are easy to reason about.
  function automatic int tval(int id, int r, int c);
    return ((r * 7 + c * 3 + id * 11) % 9) - 4;
  endfunction
endpackage
