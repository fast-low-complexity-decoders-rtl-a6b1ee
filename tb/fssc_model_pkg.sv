// fssc_model_pkg: testbench model of the Fast-SSC polar decoder.
//
// Generates random polar codes whose decoder tree uses only the node types the
// hardware supports, or builds the tree of a code constructed by the
// Bhattacharyya bound, emits the matching program and the expected cycle count,
// encodes random messages (x = u F^{(x)n}, frozen bits 0) and decodes frames
// with a recursive reference decoder written on plain integer arrays. The
// reference is independent of the RTL's lanes, chunks and memories; it uses the
// same arithmetic rules (min-sum F, G saturated to +-31, maximum-likelihood
// leaves, SPC flip of the first least reliable bit).
package fssc_model_pkg;
  import fssc_pkg::*;

  typedef int ia_t[];

  typedef enum int {
    T_REP, T_REP1, T_REPSPC, T_01, T_001, T_0REPSPC, T_0R, T_0SPC, T_R1, T_RSPC, T_SPLIT
  } ntype_e;

  class code_model;
    int       n, p;
    int       frozen[];
    ntype_e   ntype[int];
    instr_t   prog[$];
    int       cycles;
    int       split_bias;   // weight of plain splits for long nodes

    function new(int n_, int p_, int bias = 4);
      n = n_;
      p = p_;
      split_bias = bias;
      frozen = new[n_];
      cycles = 0;
    endfunction

    function int chunks(int len);
      return (len > p) ? len / p : 1;
    endfunction

    function void emit(opcode_e op, int len, bit side, int cost);
      instr_t i;
      i.op     = op;
      i.log2nv = 4'($clog2(len));
      i.side   = side;
      i.last   = 1'b0;
      prog.push_back(i);
      cycles += cost;
    endfunction

    function ntype_e pick(int len);
      ntype_e c[$];
      if (len == 4)  c = '{T_REP, T_01};
      else if (len == 8)  c = '{T_REP, T_REP1, T_REPSPC, T_001, T_0R, T_0SPC, T_R1, T_RSPC, T_SPLIT};
      else if (len == 16) c = '{T_REP, T_0REPSPC, T_0R, T_0SPC, T_R1, T_RSPC, T_SPLIT};
      else if (len == 32) c = '{T_REP, T_0R, T_0SPC, T_R1, T_RSPC, T_SPLIT};
      else if (len <= p)  c = '{T_0R, T_0SPC, T_R1, T_RSPC, T_SPLIT};
      else                c = '{T_0R, T_R1, T_SPLIT};
      if (len > 32) for (int k = 0; k < split_bias; k++) c.push_back(T_SPLIT);
      return c[$urandom_range(0, c.size() - 1)];
    endfunction

    function void freeze(int start, string pat);
      for (int k = 0; k < pat.len(); k++) if (pat[k] == "0") frozen[start + k] = 1;
    endfunction

    // build the tree of node (start, len) and its program
    function void gen(int start, int len, bit side);
      ntype_e t = pick(len);
      int h = len / 2;
      ntype[start * 4096 + len] = t;
      case (t)
        T_REP:     begin for (int k = 0; k < len - 1; k++) frozen[start + k] = 1; emit(OP_REP, len, side, 1); end
        T_REP1:    begin freeze(start, "00011111"); emit(OP_REP1, len, side, 1); end
        T_REPSPC:  begin freeze(start, "00010111"); emit(OP_REPSPC, len, side, 1); end
        T_01:      begin freeze(start, "0011"); emit(OP_01, len, side, 1); end
        T_001:     begin freeze(start, "00000011"); emit(OP_001, len, side, 1); end
        T_0REPSPC: begin freeze(start, "0000000000010111"); emit(OP_0REPSPC, len, side, 1); end
        T_0R: begin
          for (int k = 0; k < h; k++) frozen[start + k] = 1;
          emit(OP_G0R, len, side, chunks(len));
          gen(start + h, h, 1'b1);
          emit(OP_COMB0R, len, side, chunks(len));
        end
        T_0SPC: begin
          for (int k = 0; k <= h; k++) frozen[start + k] = 1;
          emit(OP_0SPC, len, side, chunks(len) + 4);
        end
        T_R1: begin
          emit(OP_F, len, side, chunks(len));
          gen(start, h, 1'b0);
          emit(OP_R1, len, side, chunks(len));
        end
        T_RSPC: begin
          emit(OP_F, len, side, chunks(len));
          gen(start, h, 1'b0);
          frozen[start + h] = 1;
          emit(OP_RSPC, len, side, chunks(len) + 4);
        end
        default: begin
          emit(OP_F, len, side, chunks(len));
          gen(start, h, 1'b0);
          emit(OP_G, len, side, chunks(len));
          gen(start + h, h, 1'b1);
          emit(OP_COMB, len, side, chunks(len));
        end
      endcase
    endfunction

    function void build();
      prog.delete();
      ntype.delete();
      foreach (frozen[k]) frozen[k] = 0;
      cycles = 0;
      gen(0, n, 1'b0);
      prog[prog.size() - 1].last = 1'b1;
    endfunction

    // ---- codes from a frozen set ----
    // Bhattacharyya-bound construction for an erasure channel with erasure
    // probability z0: the left child of a node whose channel has parameter z
    // sees 2z - z^2, the right child z^2; the k positions with the smallest
    // values carry information.
    function void zrec(ref real z[], input int start, input int len, input real zv);
      if (len == 1) z[start] = zv;
      else begin
        zrec(z, start, len / 2, 2.0 * zv - zv * zv);
        zrec(z, start + len / 2, len / 2, zv * zv);
      end
    endfunction

    function bit pat(int start, string s);
      for (int k = 0; k < s.len(); k++) if ((frozen[start + k] != 0) != (s[k] == "0")) return 0;
      return 1;
    endfunction

    function bit all_frozen(int start, int len);
      for (int k = 0; k < len; k++) if (frozen[start + k] == 0) return 0;
      return 1;
    endfunction

    function bit spc_pat(int start, int len);  // first bit frozen, rest information
      if (frozen[start] == 0) return 0;
      for (int k = 1; k < len; k++) if (frozen[start + k] != 0) return 0;
      return 1;
    endfunction

    // decoder tree and program of node (start, len) for the frozen set given;
    // returns 0 if the node needs a type the hardware lacks
    function bit classify(int start, int len, bit side);
      int h = len / 2;
      bit ok = 1;
      ntype_e t;
      if (len <= 32 && len >= 4 && all_frozen(start, len - 1) && frozen[start + len - 1] == 0) t = T_REP;
      else if (len == 8 && pat(start, "00011111")) t = T_REP1;
      else if (len == 8 && pat(start, "00010111")) t = T_REPSPC;
      else if (len == 4 && pat(start, "0011")) t = T_01;
      else if (len == 8 && pat(start, "00000011")) t = T_001;
      else if (len == 16 && pat(start, "0000000000010111")) t = T_0REPSPC;
      else if (len <= 4) return 0;
      else if (all_frozen(start, h)) t = (len <= p && spc_pat(start + h, h)) ? T_0SPC : T_0R;
      else if (len <= p && spc_pat(start + h, h)) t = T_RSPC;
      else begin
        t = T_R1;
        for (int k = h; k < len; k++) if (frozen[start + k] != 0) t = T_SPLIT;
      end
      ntype[start * 4096 + len] = t;
      case (t)
        T_REP:     emit(OP_REP, len, side, 1);
        T_REP1:    emit(OP_REP1, len, side, 1);
        T_REPSPC:  emit(OP_REPSPC, len, side, 1);
        T_01:      emit(OP_01, len, side, 1);
        T_001:     emit(OP_001, len, side, 1);
        T_0REPSPC: emit(OP_0REPSPC, len, side, 1);
        T_0SPC:    emit(OP_0SPC, len, side, chunks(len) + 4);
        T_0R: begin
          emit(OP_G0R, len, side, chunks(len));
          ok = classify(start + h, h, 1'b1);
          emit(OP_COMB0R, len, side, chunks(len));
        end
        T_R1: begin
          emit(OP_F, len, side, chunks(len));
          ok = classify(start, h, 1'b0);
          emit(OP_R1, len, side, chunks(len));
        end
        T_RSPC: begin
          emit(OP_F, len, side, chunks(len));
          ok = classify(start, h, 1'b0);
          emit(OP_RSPC, len, side, chunks(len) + 4);
        end
        default: begin
          emit(OP_F, len, side, chunks(len));
          ok = classify(start, h, 1'b0);
          emit(OP_G, len, side, chunks(len));
          ok &= classify(start + h, h, 1'b1);
          emit(OP_COMB, len, side, chunks(len));
        end
      endcase
      return ok;
    endfunction

    // builds the (n, k) code of the construction above; returns 0 if its tree
    // cannot be decoded by the hardware's node types
    function bit build_code(int k, real z0);
      real z[];
      int idx[$];
      bit ok;
      z = new[n];
      zrec(z, 0, n, z0);
      for (int i = 0; i < n; i++) idx.push_back(i);
      idx.sort() with (z[item]);
      foreach (frozen[i]) frozen[i] = 1;
      for (int i = 0; i < k; i++) frozen[idx[i]] = 0;
      prog.delete();
      ntype.delete();
      cycles = 0;
      ok = classify(0, n, 1'b0);
      prog[prog.size() - 1].last = 1'b1;
      return ok;
    endfunction

    function int info_bits();
      int k = 0;
      foreach (frozen[i]) if (frozen[i] == 0) k++;
      return k;
    endfunction

    function ia_t encode(ia_t u);
      ia_t x = u;
      for (int h = 1; h < n; h *= 2)
        for (int b = 0; b < n; b += 2 * h)
          for (int i = b; i < b + h; i++) x[i] ^= x[i + h];
      return x;
    endfunction

    // ---- reference decoder ----
    static function int sat(int v);
      return (v > 31) ? 31 : (v < -31) ? -31 : v;
    endfunction
    static function int fm(int a, int b);
      int m = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
      return ((a < 0) != (b < 0)) ? -m : m;
    endfunction
    static function ia_t fv(ia_t al);
      ia_t r = new[al.size() / 2];
      foreach (r[i]) r[i] = fm(al[i], al[i + r.size()]);
      return r;
    endfunction
    static function ia_t gv(ia_t al, ia_t bl);
      ia_t r = new[al.size() / 2];
      foreach (r[i]) r[i] = sat((bl[i] != 0) ? al[i + r.size()] - al[i] : al[i + r.size()] + al[i]);
      return r;
    endfunction
    static function ia_t zeros(int len);
      ia_t r = new[len];
      foreach (r[i]) r[i] = 0;
      return r;
    endfunction
    static function ia_t hardv(ia_t al);
      ia_t r = new[al.size()];
      foreach (r[i]) r[i] = (al[i] < 0) ? 1 : 0;
      return r;
    endfunction
    static function ia_t spc(ia_t al);
      ia_t r = hardv(al);
      int par = 0, im = 0, mm = 1000;
      foreach (al[i]) begin
        par ^= r[i];
        if ((al[i] < 0 ? -al[i] : al[i]) < mm) begin mm = (al[i] < 0 ? -al[i] : al[i]); im = i; end
      end
      if (par != 0) r[im] ^= 1;
      return r;
    endfunction
    static function ia_t comb(ia_t bl, ia_t br);
      ia_t r = new[2 * br.size()];
      foreach (br[i]) begin r[i] = bl[i] ^ br[i]; r[i + br.size()] = br[i]; end
      return r;
    endfunction
    static function ia_t rep(ia_t al);
      ia_t r = new[al.size()];
      int s = 0;
      foreach (al[i]) s += al[i];
      foreach (r[i]) r[i] = (s < 0) ? 1 : 0;
      return r;
    endfunction
    static function ia_t ml01(ia_t al);
      ia_t v = hardv(gv(al, zeros(al.size() / 2)));
      return comb(zeros(v.size()), v);
    endfunction
    static function ia_t repspc(ia_t al);
      ia_t bl = rep(fv(al));
      return comb(bl, spc(gv(al, bl)));
    endfunction

    function ia_t dec(int start, int len, ia_t al);
      int h = len / 2;
      ia_t bl, br;
      ntype_e t;
      t = ntype[start * 4096 + len];
      case (t)
        T_REP:     return rep(al);
        T_REP1:    begin bl = rep(fv(al)); return comb(bl, hardv(gv(al, bl))); end
        T_REPSPC:  return repspc(al);
        T_01:      return ml01(al);
        T_001:     return comb(zeros(h), ml01(gv(al, zeros(h))));
        T_0REPSPC: return comb(zeros(h), repspc(gv(al, zeros(h))));
        T_0R:      return comb(zeros(h), dec(start + h, h, gv(al, zeros(h))));
        T_0SPC:    return comb(zeros(h), spc(gv(al, zeros(h))));
        T_R1:      begin bl = dec(start, h, fv(al)); return comb(bl, hardv(gv(al, bl))); end
        T_RSPC:    begin bl = dec(start, h, fv(al)); return comb(bl, spc(gv(al, bl))); end
        default: begin
          bl = dec(start, h, fv(al));
          br = dec(start + h, h, gv(al, bl));
          return comb(bl, br);
        end
      endcase
    endfunction
  endclass
endpackage
