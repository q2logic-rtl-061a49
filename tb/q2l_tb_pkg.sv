// q2l_tb_pkg: helpers shared by the pipeline testbenches.
//
// cfg_byte gives byte i of a QPU's 44-byte record in transmission order
// (first field first, most significant byte first). qpu_ref applies one
// QPU to a state held as an array of amplitudes, chunk by chunk, exactly as
// the hardware does: in each chunk of 2^nsys amplitudes, output position a
// receives result element (a & 1) of the pair whose original labels are
// bitswitch(a & ~1) and bitswitch(a | 1), and the pair is kept unchanged
// where the gate is GATE_PASS or a controlled gate whose control bit (of
// the original label) is 0. rotr is the state writer's address rotation.
package q2l_tb_pkg;
  import q2l_pkg::*;
  import fp_ref_pkg::*;

  typedef cplx_t state_t[];

  function automatic logic [7:0] cfg_byte(qpu_cfg_t c, int i);
    logic [CFG_BITS-1:0] v;
    v = c;
    return v[CFG_BITS - 1 - 8 * i -: 8];
  endfunction

  function automatic int swap01(int v, int t);
    int b0, bt, r;
    b0 = v & 1;
    bt = (v >> t) & 1;
    r  = v & ~(1 | (1 << t));
    return r | (bt) | (b0 << t);
  endfunction

  function automatic void qpu_ref(ref state_t st, input qpu_cfg_t c, input int nsys);
    state_t o;
    int csz, t, k;
    csz = 1 << nsys;
    t = int'(c.target);
    k = int'(c.control);
    o = new[st.size()];
    for (int base = 0; base < st.size(); base += csz) begin
      for (int a = 0; a < csz; a += 2) begin
        int l0, l1;
        cpair_t x, y;
        logic keep;
        l0 = swap01(a, t);
        l1 = swap01(a + 1, t);
        x[0] = st[base + l0];
        x[1] = st[base + l1];
        keep = (c.kind == GATE_PASS) || (c.kind == GATE_CONTROLLED && ((l0 >> k) & 1) == 0);
        y = keep ? x : mv2(c.a, c.b, c.c, c.d, x);
        o[base + a]     = y[0];
        o[base + a + 1] = y[1];
      end
    end
    st = o;
  endfunction

  function automatic int rotr(int l, int r, int q);
    int o;
    o = 0;
    for (int i = 0; i < q; i++)
      o |= ((l >> ((i + r) % q)) & 1) << i;
    return o;
  endfunction

  // common gate matrices
  function automatic qpu_cfg_t gate(gate_kind_e kind, cplx_t a, cplx_t b, cplx_t c, cplx_t d,
                                    int target, int control);
    qpu_cfg_t g;
    g.a = a; g.b = b; g.c = c; g.d = d;
    g.kind = kind;
    g.target = 32'(target);
    g.control = 32'(control);
    return g;
  endfunction

  function automatic qpu_cfg_t rnd_gate(int nsys);
    int k, t, c;
    k = $urandom % 8;
    t = $urandom % nsys;
    c = $urandom % nsys;
    if (c == t) c = (t + 1) % nsys;
    if (k == 0) return gate(GATE_PASS, rnd_c(), rnd_c(), rnd_c(), rnd_c(), 0, 0);
    if (k <= 2) return gate(GATE_CONTROLLED, rnd_c(), rnd_c(), rnd_c(), rnd_c(), t, c);
    return gate(GATE_UNARY, rnd_c(), rnd_c(), rnd_c(), rnd_c(), t, c);
  endfunction

  // A random unitary 2x2 matrix (H, X, Y, Z, S, T, T-dagger, a y-rotation
  // or a phase gate with a random angle), so that long gate sequences keep
  // amplitudes bounded.
  function automatic qpu_cfg_t rnd_unitary(gate_kind_e kind, int target, int control);
    real h, th, c, sn;
    cplx_t one, zero;
    h = 0.70710678118654752;
    th = real'($urandom % 10000) * 6.283185307179586 / 10000.0;
    c = $cos(th);
    sn = $sin(th);
    one = mk_c(1.0, 0.0);
    zero = '0;
    case ($urandom % 9)
      0: return gate(kind, mk_c(h, 0.0), mk_c(h, 0.0), mk_c(h, 0.0), mk_c(-h, 0.0), target, control);
      1: return gate(kind, zero, one, one, zero, target, control);
      2: return gate(kind, zero, mk_c(0.0, -1.0), mk_c(0.0, 1.0), zero, target, control);
      3: return gate(kind, one, zero, zero, mk_c(-1.0, 0.0), target, control);
      4: return gate(kind, one, zero, zero, mk_c(0.0, 1.0), target, control);
      5: return gate(kind, one, zero, zero, mk_c(h, h), target, control);
      6: return gate(kind, one, zero, zero, mk_c(h, -h), target, control);
      7: return gate(kind, mk_c(c, 0.0), mk_c(-sn, 0.0), mk_c(sn, 0.0), mk_c(c, 0.0), target, control);
      default: return gate(kind, one, zero, zero, mk_c(c, sn), target, control);
    endcase
  endfunction

  function automatic qpu_cfg_t rnd_unitary_gate(int nsys);
    int k, t, c;
    k = $urandom % 8;
    t = $urandom % nsys;
    c = $urandom % nsys;
    if (c == t) c = (t + 1) % nsys;
    if (k == 0) return rnd_unitary(GATE_PASS, 0, 0);
    if (k <= 2) return rnd_unitary(GATE_CONTROLLED, t, c);
    return rnd_unitary(GATE_UNARY, t, c);
  endfunction
endpackage
