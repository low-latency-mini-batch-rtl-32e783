// gnn_ref_pkg: reference model for the PE and accelerator testbenches.
// gcn_case holds one target vertex's subgraph (features, edges, weights) for a
// one-layer decoupled GCN-style model -- FA (sum, weighted edges), FT with
// ReLU, readout by element-wise max -- and computes the expected embedding in
// plain integer arithmetic, independently of the RTL. Q16.16 products are
// truncated (>>> 16) exactly as the hardware does, so results match bit for bit.
package gnn_ref_pkg;

  function automatic int qm(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  class gcn_case;
    int nv, fin, fout, ne;
    int h   [][];      // [nv][fin]
    int w   [][];      // [fin][fout]
    int esrc[], edst[], ew[];
    int z   [][];
    int h1  [][];
    int emb [];

    function new(int nv_, int fin_, int fout_, int ne_, int seed);
      int s;
      nv = nv_; fin = fin_; fout = fout_; ne = ne_;
      s = seed;
      h = new[nv];
      foreach (h[v]) begin
        h[v] = new[fin];
        foreach (h[v][k]) h[v][k] = int'($urandom() % (4 << 16)) - (2 << 16);
      end
      w = new[fin];
      foreach (w[k]) begin
        w[k] = new[fout];
        foreach (w[k][j]) w[k][j] = int'($urandom() % (1 << 16)) - (1 << 15);
      end
      esrc = new[ne]; edst = new[ne]; ew = new[ne];
      for (int e = 0; e < ne; e++) begin
        // self loops first, then random edges, several into the same vertex
        if (e < nv) begin esrc[e] = e; edst[e] = e; end
        else begin esrc[e] = int'($urandom() % nv); edst[e] = int'($urandom() % 3); end
        ew[e] = int'($urandom() % (1 << 16));
      end
    endfunction

    function void compute();
      z = new[nv];
      foreach (z[v]) begin z[v] = new[fin]; foreach (z[v][k]) z[v][k] = 0; end
      for (int e = 0; e < ne; e++)
        for (int k = 0; k < fin; k++)
          z[edst[e]][k] += qm(h[esrc[e]][k], ew[e]);
      h1 = new[nv];
      foreach (h1[v]) begin
        h1[v] = new[fout];
        for (int j = 0; j < fout; j++) begin
          int acc;
          acc = 0;
          for (int k = 0; k < fin; k++) acc += qm(z[v][k], w[k][j]);
          h1[v][j] = (acc < 0) ? 0 : acc;
        end
      end
      emb = new[fout];
      for (int j = 0; j < fout; j++) begin
        emb[j] = 32'h8000_0000;
        for (int v = 0; v < nv; v++) if (h1[v][j] > emb[j]) emb[j] = h1[v][j];
      end
    endfunction
  endclass

endpackage
