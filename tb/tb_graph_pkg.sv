// tb_graph_pkg: random bipartite graphs and reference models for the
// testbenches.
//
// graph_c holds a semantic graph as an edge list with distinct (src, dst)
// pairs and derives both CSR directions from it. ref_max_matching() computes
// the size of a maximum matching with the textbook depth-first augmenting
// path method (Kuhn), which is independent of the breadth-first, hardware
// style search used by the design. ref_class() applies the backbone selection
// rule to a given set of matched vertices.
package tb_graph_pkg;

  class graph_c;
    int ns, nd, ne;
    int es[$];
    int ed[$];
    // CSR, source side (out-neighbours) and destination side (in-neighbours)
    int soff[$];
    int snbr[$];
    int doff[$];
    int dnbr[$];
    // Kuhn's algorithm state
    int kmatch_d[$];
    bit kvis[$];

    function new(int ns_i, int nd_i);
      ns = ns_i;
      nd = nd_i;
      ne = 0;
    endfunction

    function bit has_edge(int s, int d);
      for (int i = 0; i < ne; i++) if (es[i] == s && ed[i] == d) return 1;
      return 0;
    endfunction

    function void add_edge(int s, int d);
      if (!has_edge(s, d)) begin
        es.push_back(s);
        ed.push_back(d);
        ne++;
      end
    endfunction

    // every edge present with probability pct/100
    function void randomize_edges(int pct);
      for (int s = 0; s < ns; s++)
        for (int d = 0; d < nd; d++)
          if (int'($urandom_range(99)) < pct) add_edge(s, d);
    endfunction

    // every source gets k random out-neighbours (repeats dropped)
    function void randomize_degree(int k);
      for (int s = 0; s < ns; s++)
        for (int j = 0; j < k; j++) add_edge(s, $urandom_range(nd - 1));
    endfunction

    function void build_csr();
      soff.delete(); snbr.delete(); doff.delete(); dnbr.delete();
      for (int s = 0; s < ns; s++) begin
        soff.push_back(snbr.size());
        for (int i = 0; i < ne; i++) if (es[i] == s) snbr.push_back(ed[i]);
      end
      soff.push_back(snbr.size());
      for (int d = 0; d < nd; d++) begin
        doff.push_back(dnbr.size());
        for (int i = 0; i < ne; i++) if (ed[i] == d) dnbr.push_back(es[i]);
      end
      doff.push_back(dnbr.size());
    endfunction

    function bit kuhn_try(int s);
      for (int i = soff[s]; i < soff[s+1]; i++) begin
        int d;
        d = snbr[i];
        if (!kvis[d]) begin
          kvis[d] = 1;
          if (kmatch_d[d] < 0 || kuhn_try(kmatch_d[d])) begin
            kmatch_d[d] = s;
            return 1;
          end
        end
      end
      return 0;
    endfunction

    function int ref_max_matching();
      int m;
      m = 0;
      kmatch_d.delete();
      for (int d = 0; d < nd; d++) kmatch_d.push_back(-1);
      for (int s = 0; s < ns; s++) begin
        kvis.delete();
        for (int d = 0; d < nd; d++) kvis.push_back(0);
        if (kuhn_try(s)) m++;
      end
      return m;
    endfunction

    // Backbone rule: a matched source with an unmatched out-neighbour is
    // Src_in, a matched destination with an unmatched in-neighbour is Dst_in;
    // everything else is out. Returns 1 for "in".
    function bit ref_src_in(int s, const ref bit msrc[$], const ref bit mdst[$]);
      if (!msrc[s]) return 0;
      for (int i = soff[s]; i < soff[s+1]; i++) if (!mdst[snbr[i]]) return 1;
      return 0;
    endfunction

    function bit ref_dst_in(int d, const ref bit msrc[$], const ref bit mdst[$]);
      if (!mdst[d]) return 0;
      for (int i = doff[d]; i < doff[d+1]; i++) if (!msrc[dnbr[i]]) return 1;
      return 0;
    endfunction
  endclass

endpackage
