// tdp_tb_pkg: test-side model of the overlay's software flow.
//
// graph_c builds a random layered dataflow graph of two-input ADD/MUL nodes
// fed by source nodes, places its nodes on the PEs of an NX x NY overlay,
// labels each node with its criticality (the length of the longest path from
// it to a sink) and lays out each PE's graph memory with the nodes in
// decreasing criticality from address 256 upwards, one header word, one state
// word and one word per fanout edge (the format of tdp_pkg). It also computes
// the expected value of every node with the simulator's own floating point
// (binary32 operands widened to binary64, result rounded once to binary32,
// which is exact for the value ranges used here).
package tdp_tb_pkg;
  import tdp_pkg::*;

  function automatic logic [63:0] f2d(input logic [31:0] f);
    if (f[30:23] == 8'h00) return {f[31], 63'd0};
    return {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
  endfunction

  function automatic logic [31:0] d2f(input logic [63:0] d);
    logic [10:0] e11; logic [23:0] m; logic up; logic [7:0] e8;
    if (d[62:0] == 63'd0) return 32'd0;
    e11 = d[62:52];
    up  = d[28] & ((|d[27:0]) | d[29]);
    m   = {1'b0, d[51:29]} + 24'(up);
    e8  = 8'(e11 - 11'd896) + 8'(m[23]);
    return {d[63], e8, m[22:0]};
  endfunction

  function automatic logic [31:0] fop(input opcode_e op, input logic [31:0] a, input logic [31:0] b);
    real r;
    if (op == OP_MUL) r = $bitstoreal(f2d(a)) * $bitstoreal(f2d(b));
    else              r = $bitstoreal(f2d(a)) + $bitstoreal(f2d(b));
    return d2f($realtobits(r));
  endfunction

  typedef struct {
    int          pe;
    int          addr;
    bit          is_src;
    opcode_e     op;
    int          in0, in1;
    logic [31:0] value;      // expected result (or preloaded source value)
    int          height;     // criticality
    int          fo_node[$];
    int          fo_slot[$];
  } node_t;

  typedef struct { int pe; int addr; logic [WORD_W-1:0] word; } load_t;

  class graph_c;
    int    nx, ny, npe;
    node_t n[];
    int    n_src, n_edges, levels;
    load_t loads[$];
    int    rdy_pe[$], rdy_addr[$];
    int    words_used[];

    // n_src sources, then `levels` layers of `width` nodes; each node takes
    // its operands from random earlier nodes (mostly the previous layer).
    function new(int nx_, int ny_, int n_src_, int levels_, int width, int pe_span);
      int total, lo, hi, idx;
      nx = nx_; ny = ny_; npe = nx * ny; n_src = n_src_; levels = levels_;
      total = n_src + levels * width;
      n = new[total];
      for (int i = 0; i < total; i++) begin
        n[i].pe = int'($urandom % pe_span);
        n[i].in0 = -1; n[i].in1 = -1;
        n[i].op = OP_ADD;
      end
      for (int i = 0; i < n_src; i++) begin
        n[i].is_src = 1;
        n[i].value  = {1'b0, 8'(126 + $urandom % 2), 23'($urandom)};   // [0.5, 2)
      end
      n_edges = 0;
      for (int l = 0; l < levels; l++) begin
        lo = (l == 0) ? 0 : n_src + (l - 1) * width;
        hi = n_src + l * width;                // exclusive
        for (int k = 0; k < width; k++) begin
          idx = hi + k;
          n[idx].is_src = 0;
          n[idx].op  = ($urandom % 2) ? OP_MUL : OP_ADD;
          n[idx].in0 = lo + int'($urandom % (hi - lo));
          n[idx].in1 = ($urandom % 4 == 0) ? int'($urandom % hi) : lo + int'($urandom % (hi - lo));
          if ($urandom % 8 == 0) n[idx].in1 = n[idx].in0;   // both operands from one node
          n[idx].value = fop(n[idx].op, n[n[idx].in0].value, n[n[idx].in1].value);
          n[n[idx].in0].fo_node.push_back(idx); n[n[idx].in0].fo_slot.push_back(0);
          n[n[idx].in1].fo_node.push_back(idx); n[n[idx].in1].fo_slot.push_back(1);
          n_edges += 2;
        end
      end
      // criticality: longest path to a sink
      for (int i = total - 1; i >= 0; i--) begin
        n[i].height = 0;
        foreach (n[i].fo_node[j])
          if (n[n[i].fo_node[j]].height + 1 > n[i].height) n[i].height = n[n[i].fo_node[j]].height + 1;
      end
      place();
    endfunction

    // per PE: decreasing criticality from address FLAG_WORDS upwards
    function void place();
      int order[$];
      hdr_t h; state_t st; edge_t e;
      int a;
      words_used = new[npe];
      foreach (words_used[p]) words_used[p] = FLAG_WORDS;
      foreach (n[i]) order.push_back(i);
      order.sort() with (-n[item].height * 1000000 + item);
      foreach (order[k]) begin
        automatic int i = order[k];
        n[i].addr = words_used[n[i].pe];
        words_used[n[i].pe] += 2 + n[i].fo_node.size();
      end
      foreach (order[k]) begin
        automatic int i = order[k];
        a = n[i].addr;
        h = '{rsvd: '0, fanout: 12'(n[i].fo_node.size())};
        st = '{present: 1'b0, slot: 1'b0, op: n[i].op, rsvd: '0,
               data: n[i].is_src ? n[i].value : 32'd0};
        loads.push_back('{pe: n[i].pe, addr: a, word: h});
        loads.push_back('{pe: n[i].pe, addr: a + 1, word: st});
        foreach (n[i].fo_node[j]) begin
          automatic int d = n[i].fo_node[j];
          e = '{x: 4'(n[d].pe % nx), y: 4'(n[d].pe / nx), node: 12'(n[d].addr),
                slot: 1'(n[i].fo_slot[j]), rsvd: '0};
          loads.push_back('{pe: n[i].pe, addr: a + 2 + j, word: e});
        end
        if (n[i].is_src) begin rdy_pe.push_back(n[i].pe); rdy_addr.push_back(a); end
      end
    endfunction

    function int max_words();
      int m = 0;
      foreach (words_used[p]) if (words_used[p] > m) m = words_used[p];
      return m;
    endfunction
  endclass

endpackage
