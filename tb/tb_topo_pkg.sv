// tb_topo_pkg -- reference picture of the 4x4 D2D-MoT topology for the testbenches.
//
// Written from the leaf-grid description, independently of the design's package: the
// neighbour table is filled by walking the leaves, stems and roots in grid terms. Then
// all-pairs hop distances come from Floyd-Warshall. Node and port numbers are those
// documented for the design (leaf 4r+c; row stems 16+2r+h; column stems 24+2c+h; row
// roots 32+r; column roots 36+c; leaf ports core0, core1, row stem, column stem,
// diagonal; stem ports child0, child1, root; root ports stem0, stem1, opposite root).
package tb_topo_pkg;

  typedef struct {
    int nbr [40][5];     // neighbour router through each port, -1 if none or a core
    int d   [40][40];    // hop distance between routers
  } topo_t;

  function automatic topo_t build();
    topo_t t;
    for (int n = 0; n < 40; n++) for (int p = 0; p < 5; p++) t.nbr[n][p] = -1;
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 4; c++) begin
        int lf, rs, cs;
        lf = r * 4 + c;
        rs = 16 + r * 2 + (c >= 2);
        cs = 24 + c * 2 + (r >= 2);
        t.nbr[lf][2] = rs;  t.nbr[rs][c % 2] = lf;
        t.nbr[lf][3] = cs;  t.nbr[cs][r % 2] = lf;
        // diagonal partner inside the 2x2 module
        t.nbr[lf][4] = ((r % 2) ? r - 1 : r + 1) * 4 + ((c % 2) ? c - 1 : c + 1);
      end
      for (int h = 0; h < 2; h++) begin
        t.nbr[16 + r * 2 + h][2] = 32 + r;  t.nbr[32 + r][h] = 16 + r * 2 + h;
        t.nbr[24 + r * 2 + h][2] = 36 + r;  t.nbr[36 + r][h] = 24 + r * 2 + h;
      end
    end
    t.nbr[33][2] = 34; t.nbr[34][2] = 33;
    t.nbr[37][2] = 38; t.nbr[38][2] = 37;
    for (int a = 0; a < 40; a++)
      for (int b = 0; b < 40; b++) t.d[a][b] = (a == b) ? 0 : 1000;
    for (int a = 0; a < 40; a++)
      for (int p = 0; p < 5; p++) if (t.nbr[a][p] >= 0) t.d[a][t.nbr[a][p]] = 1;
    for (int k = 0; k < 40; k++)
      for (int a = 0; a < 40; a++)
        for (int b = 0; b < 40; b++)
          if (t.d[a][k] + t.d[k][b] < t.d[a][b]) t.d[a][b] = t.d[a][k] + t.d[k][b];
    return t;
  endfunction

endpackage
