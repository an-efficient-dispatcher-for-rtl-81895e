// tb_graph_pkg: graph construction and reference results for the testbenches.
//
// graph_c holds a directed edge list and derives from it, in software, what
// the host hands to the engine: the CSR arrays (offset, neighbour), the
// edge-block arrays for VPB destinations per block (block start, block
// count, and the edge list grouped by block, source and destination), and a
// reference breadth-first search giving each vertex's depth (255 if not
// reached). The builders below produce the test graphs.
package tb_graph_pkg;

  class graph_c;
    int unsigned n;
    int unsigned vpb;
    int unsigned src[$];
    int unsigned dst[$];
    // derived
    int unsigned offset[$];
    int unsigned neigh[$];
    int unsigned bstart[$];
    int unsigned bcount[$];
    int unsigned esrc[$];
    int unsigned edst[$];
    int unsigned depth[$];

    function new(int unsigned n_v, int unsigned vpb_in);
      n   = n_v;
      vpb = vpb_in;
    endfunction

    function void add(int unsigned s, int unsigned d);
      src.push_back(s);
      dst.push_back(d);
    endfunction

    function int unsigned num_blocks();
      return (n + vpb - 1) / vpb;
    endfunction

    // CSR: edges in order of source, keeping insertion order within a source
    function void build();
      int unsigned deg[$];
      int unsigned pos[$];
      int unsigned nb;
      offset.delete(); neigh.delete(); bstart.delete(); bcount.delete();
      esrc.delete(); edst.delete();
      for (int unsigned v = 0; v < n; v++) deg.push_back(0);
      foreach (src[e]) deg[src[e]]++;
      offset.push_back(0);
      for (int unsigned v = 0; v < n; v++) offset.push_back(offset[v] + deg[v]);
      for (int unsigned v = 0; v < n; v++) pos.push_back(offset[v]);
      foreach (src[e]) neigh.push_back(0);
      foreach (src[e]) begin
        neigh[pos[src[e]]] = dst[e];
        pos[src[e]]++;
      end
      // edge-blocks: group edges by dst / vpb, keeping edge-list order
      nb = num_blocks();
      for (int unsigned b = 0; b < nb; b++) begin
        bstart.push_back(esrc.size());
        foreach (src[e]) if (dst[e] / vpb == b) begin
          esrc.push_back(src[e]);
          edst.push_back(dst[e]);
        end
        bcount.push_back(esrc.size() - bstart[b]);
      end
    endfunction

    // reference level-synchronous BFS
    function void bfs(int unsigned root);
      int unsigned q[$];
      depth.delete();
      for (int unsigned v = 0; v < n; v++) depth.push_back(255);
      depth[root] = 0;
      q.push_back(root);
      while (q.size() > 0) begin
        int unsigned u;
        u = q.pop_front();
        for (int unsigned k = offset[u]; k < offset[u+1]; k++)
          if (depth[neigh[k]] == 255) begin
            depth[neigh[k]] = depth[u] + 1;
            q.push_back(neigh[k]);
          end
      end
    endfunction
  endclass

  // The 9-vertex example graph used throughout the reference paper's figures
  function automatic graph_c example_graph(int unsigned vpb);
    graph_c g = new(9, vpb);
    g.add(0, 1); g.add(0, 2); g.add(3, 0); g.add(1, 3); g.add(1, 4); g.add(1, 5);
    g.add(2, 3); g.add(2, 6); g.add(3, 6); g.add(4, 3); g.add(4, 5); g.add(4, 7);
    g.add(5, 3); g.add(5, 8); g.add(6, 7); g.add(7, 8); g.add(8, 6);
    g.build();
    return g;
  endfunction

  // A skewed graph: a spanning tree, a hub (vertex 0) with `hub_deg` direct
  // neighbours, one destination block receiving `large_in` edges (a large
  // block), one receiving `mid_in` edges (a middle block), and `extra`
  // random edges.
  function automatic graph_c skewed_graph(int unsigned n, int unsigned vpb, int unsigned hub_deg,
                                          int unsigned large_in, int unsigned mid_in,
                                          int unsigned extra);
    graph_c g = new(n, vpb);
    for (int unsigned v = 1; v < n; v++) begin
      int unsigned p;
      p = (v < 4) ? 0 : $urandom_range(v / 4, v - 1);
      g.add(p, v);
    end
    for (int unsigned k = 1; k <= hub_deg; k++) g.add(0, (k * 37) % n);
    for (int unsigned k = 0; k < large_in; k++) g.add(16 + (k % (n - 16)), vpb + (k % vpb));
    for (int unsigned k = 0; k < mid_in; k++)   g.add(32 + (k % (n - 32)), 2 * vpb + (k % vpb));
    for (int unsigned k = 0; k < extra; k++)    g.add($urandom_range(0, n - 1), $urandom_range(0, n - 1));
    g.build();
    return g;
  endfunction

endpackage
