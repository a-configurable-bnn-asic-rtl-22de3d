// tulip_sched_pkg: the schedule compiler for the TULIP-PE, used by the
// testbenches to produce PE programs (sequences of pe_ctrl_t words).
//
// It builds, for an N-input binary neuron, the adder tree of the paper:
// leaves add three input bits (a full adder: carry neuron = majority [1,1,1;2],
// sum neuron = [2,1,1,1;3] with the inverted carry on the weight-2 input);
// every inner node adds its two subtrees plus one fresh input bit as carry-in,
// bit-serially from LSB, so its result is one bit wider than its widest
// operand. Nodes are visited in reverse post order (left subtree, right
// subtree, node), so only the partial sums still needed are stored.
//
// Roles in a k-bit addition (cycles 1..k+2): operand neurons A and B read
// their local registers and put bits x(t-2), x(t-1) on their shared b and c
// lines; the carry neuron C computes carry i in cycle i+1 (majority of x_i,
// y_i and its own previous output); B doubles as the delay neuron D holding
// the previous carry ([2,1,1,1;3] on two copies of C); the sum neuron S
// computes sum bit i in cycle i+2 and writes it to its register, and in the
// last cycle copies the final carry. The result lives in S's register.
// Storage is a per-neuron bit map; S is the neuron with most free bits among
// those allowed. If both operands of a node end up in the same neuron, the
// right one is first copied to another neuron (one bit per cycle).
//
// Other programs: comparator (x >= T or x > T, LSB first, feedback neuron
// [1,1,1(inv),2(0);2]), RELU (comparator, then each bit ANDed with the
// result by [1,1;2]) and 4x4-input max-pooling (OR = [2,1,1,1;1]).
package tulip_sched_pkg;
  import tulip_pkg::*;

  typedef struct {
    int n;      // neuron holding the value
    int addr;   // first local-register bit
    int width;
  } val_t;

  class tulip_prog;
    pe_ctrl_t    w[$];
    logic [15:0] used [NEURONS];
    int          n_add, n_leaf, n_move;

    function new(); clear(); endfunction

    function void clear();
      w.delete();
      foreach (used[i]) used[i] = '0;
      n_add = 0; n_leaf = 0; n_move = 0;
    endfunction

    static function pe_ctrl_t blank();
      pe_ctrl_t c = '0;
      for (int n = 0; n < NEURONS; n++)
        for (int i = 0; i < NIN; i++) c.n[n].sel[i] = SEL_ZERO;
      return c;
    endfunction

    static function logic [SEL_W-1:0] ny(int self, int other);
      return SEL_NY0 + SEL_W'(nbr_index(self, other));
    endfunction
    static function logic [SEL_W-1:0] nb(int self, int other);
      return SEL_NB0 + SEL_W'(nbr_index(self, other));
    endfunction
    static function logic [SEL_W-1:0] nc(int self, int other);
      return SEL_NC0 + SEL_W'(nbr_index(self, other));
    endfunction
    static function logic [SEL_W-1:0] rb(int bitpos);
      return SEL_R0 + SEL_W'(bitpos);
    endfunction

    function int nfree(int n);
      return 16 - $countones(used[n]);
    endfunction

    function int alloc(int n, int width);
      for (int a = 0; a + width <= 16; a++) begin
        logic ok = 1;
        for (int i = 0; i < width; i++) if (used[n][a+i]) ok = 0;
        if (ok) begin
          for (int i = 0; i < width; i++) used[n][a+i] = 1'b1;
          return a;
        end
      end
      $fatal(1, "local register of neuron %0d full (need %0d; maps %b %b %b %b)", n, width, used[0], used[1], used[2], used[3]);
      return -1;
    endfunction

    function void release_(val_t v);
      for (int i = 0; i < v.width; i++) used[v.n][v.addr+i] = 1'b0;
    endfunction

    // full adder on up to three input bits at product index lo
    function void leaf(int lo, int cnt, int s, int c, int dst);
      pe_ctrl_t x;
      logic [SEL_W-1:0] src [3];
      for (int j = 0; j < 3; j++) src[j] = (j < cnt) ? SEL_IN0 + SEL_W'(j) : SEL_ZERO;
      x = blank();
      x.n[c].sel = {src[2], src[1], src[0], SEL_ZERO};
      x.n[c].thr = 3'd2; x.n[c].en = 1; x.n[c].ibase = IDX_W'(lo);
      w.push_back(x);
      x = blank();
      x.n[s].sel = {src[2], src[1], src[0], ny(s, c)};
      x.n[s].inv = 4'b0001; x.n[s].thr = 3'd3; x.n[s].en = 1; x.n[s].ibase = IDX_W'(lo);
      x.n[s].we = 1; x.n[s].wa = 4'(dst);
      w.push_back(x);
      x = blank();
      x.n[s].sel = {ny(s, c), SEL_ZERO, SEL_ZERO, ny(s, c)};
      x.n[s].thr = 3'd3; x.n[s].en = 1; x.n[s].we = 1; x.n[s].wa = 4'(dst + 1);
      w.push_back(x);
      n_leaf++;
    endfunction

    // bit-serial addition a + b + cin into neuron s at dst; b also delays the carry
    function void add(val_t a, val_t b, int s, int c, int dst, int cin);
      int k = (a.width > b.width) ? a.width : b.width;
      int d = b.n;
      for (int t = 1; t <= k + 2; t++) begin
        pe_ctrl_t x = blank();
        // operand broadcast on shared b (bit t-2) and c (bit t-1) lines
        if (t - 2 >= 0 && t - 2 < a.width) x.n[a.n].sel[1] = rb(a.addr + t - 2);
        if (t - 1 >= 0 && t - 1 < a.width) x.n[a.n].sel[2] = rb(a.addr + t - 1);
        if (t - 2 >= 0 && t - 2 < b.width) x.n[b.n].sel[1] = rb(b.addr + t - 2);
        if (t - 1 >= 0 && t - 1 < b.width) x.n[b.n].sel[2] = rb(b.addr + t - 1);
        if (t <= k) begin   // carry
          x.n[c].sel[0] = SEL_ZERO;
          x.n[c].sel[1] = nc(c, a.n);
          x.n[c].sel[2] = nc(c, b.n);
          x.n[c].sel[3] = (t == 1) ? ((cin >= 0) ? SEL_IN0 : SEL_ZERO) : SEL_FB;
          x.n[c].thr = 3'd2; x.n[c].en = 1;
          x.n[c].ibase = (cin >= 0) ? IDX_W'(cin) : '0;
        end
        if (t >= 2 && t <= k + 1) begin
          // delay neuron: D <= C
          x.n[d].sel[0] = ny(d, c); x.n[d].sel[3] = ny(d, c);
          x.n[d].thr = 3'd3; x.n[d].en = 1;
          // sum bit t-2
          x.n[s].sel[0] = ny(s, c); x.n[s].inv = 4'b0001;
          x.n[s].sel[1] = nb(s, a.n);
          x.n[s].sel[2] = nb(s, b.n);
          x.n[s].sel[3] = (t == 2) ? ((cin >= 0) ? SEL_IN0 : SEL_ZERO) : ny(s, d);
          x.n[s].ibase = (cin >= 0) ? IDX_W'(cin) : '0;
          x.n[s].thr = 3'd3; x.n[s].en = 1; x.n[s].we = 1; x.n[s].wa = 4'(dst + t - 2);
        end
        if (t == k + 2) begin  // final carry becomes the top sum bit
          x.n[s].sel = {ny(s, d), SEL_ZERO, SEL_ZERO, ny(s, d)};
          x.n[s].thr = 3'd3; x.n[s].en = 1; x.n[s].we = 1; x.n[s].wa = 4'(dst + k);
        end
        w.push_back(x);
      end
      n_add++;
    endfunction

    function int pick(int ex0, int ex1, int ex2);
      int best = -1;
      for (int n = 0; n < NEURONS; n++)
        if (n != ex0 && n != ex1 && n != ex2)
          if (best < 0 || nfree(n) > nfree(best)) best = n;
      return best;
    endfunction

    // copy a value into neuron z (one bit per cycle over z's a and d inputs)
    function val_t move(val_t v, int z);
      val_t r;
      r.n = z; r.width = v.width; r.addr = alloc(z, v.width);
      for (int i = 0; i < v.width; i++) begin
        pe_ctrl_t x = blank();
        x.n[v.n].sel[1] = rb(v.addr + i);
        x.n[z].sel = {nb(z, v.n), SEL_ZERO, SEL_ZERO, nb(z, v.n)};
        x.n[z].thr = 3'd3; x.n[z].en = 1; x.n[z].we = 1; x.n[z].wa = 4'(r.addr + i);
        w.push_back(x);
      end
      release_(v);
      n_move++;
      return r;
    endfunction

    // adder tree over product bits [lo, lo+n) in reverse post order
    function val_t tree(int lo, int n);
      val_t r;
      if (n <= 3) begin
        int s = pick(-1, -1, -1);
        int c = (s + 1) % NEURONS;
        r.n = s; r.width = 2; r.addr = alloc(s, 2);
        leaf(lo, n, s, c, r.addr);
      end else begin
        int nl = n / 2;
        int nr = n - 1 - nl;
        val_t vl, vr;
        int s, c;
        vl = tree(lo + 1, nl);
        vr = tree(lo + 1 + nl, nr);
        // the two operands must sit in different neurons
        if (vr.n == vl.n) vr = move(vr, pick(vl.n, -1, -1));
        release_(vl); release_(vr);
        s = pick(vl.n, vr.n, -1);
        c = pick(vl.n, vr.n, s);
        r.n = s;
        r.width = ((vl.width > vr.width) ? vl.width : vr.width) + 1;
        r.addr = alloc(s, r.width);
        add(vl, vr, s, c, r.addr, lo);
      end
      return r;
    endfunction

    // x >= T (ge=1) or x > T (ge=0); T arrives LSB first on input index tidx+i
    function void cmp(val_t v, int tidx, int tw, bit ge);
      int nn = (v.width > tw) ? v.width : tw;
      for (int i = 0; i < nn; i++) begin
        pe_ctrl_t x = blank();
        x.n[v.n].sel[0] = SEL_ZERO;
        x.n[v.n].sel[1] = (i < v.width) ? rb(v.addr + i) : SEL_ZERO;
        x.n[v.n].sel[2] = (i < tw) ? SEL_IN0 : SEL_ZERO;
        x.n[v.n].inv    = 4'b0100;
        x.n[v.n].sel[3] = (i == 0) ? (ge ? SEL_ONE : SEL_ZERO) : SEL_FB;
        x.n[v.n].ibase  = IDX_W'(tidx + i);
        x.n[v.n].thr = 3'd2; x.n[v.n].en = 1;
        w.push_back(x);
      end
    endfunction

    // RELU: x if x > T else 0, written to neuron z at dst
    function void relu(val_t v, int tidx, int tw, int z, int dst);
      cmp(v, tidx, tw, 1'b0);
      for (int i = 0; i < v.width; i++) begin
        pe_ctrl_t x = blank();
        x.n[v.n].sel[1] = rb(v.addr + i);
        x.n[z].sel = {SEL_ZERO, ny(z, v.n), nb(z, v.n), SEL_ZERO};
        x.n[z].thr = 3'd2; x.n[z].en = 1; x.n[z].we = 1; x.n[z].wa = 4'(dst + i);
        w.push_back(x);
      end
    endfunction

    // four 4-input ORs, neuron n on input bits base+4n .. base+4n+3
    function void maxpool(int base);
      pe_ctrl_t x = blank();
      for (int n = 0; n < NEURONS; n++) begin
        x.n[n].sel = {SEL_IN0 + 5'd3, SEL_IN0 + 5'd2, SEL_IN0 + 5'd1, SEL_IN0};
        x.n[n].ibase = IDX_W'(base + 4*n);
        x.n[n].thr = 3'd1; x.n[n].en = 1;
      end
      w.push_back(x);
    endfunction

    function void capture(int n);
      pe_ctrl_t x = blank();
      x.capture = 1'b1; x.out_sel = 2'(n);
      w.push_back(x);
    endfunction

    // complete binary neuron: popcount of products [0,np) >= T at [tidx, tidx+tw)
    function val_t neuron(int np, int tidx, int tw);
      val_t v = tree(0, np);
      cmp(v, tidx, tw, 1'b1);
      capture(v.n);
      return v;
    endfunction
  endclass
endpackage
