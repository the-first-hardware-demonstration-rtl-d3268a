// docking_pkg -- the 42-node lipoprotein / LolCDE-LolA docking problem as a
// maximum weighted clique problem, and its mapping onto the RRAM array.
//
//   * vertex v = 7*l + p + 1 pairs ligand point l (hp1..hp5, ha1) with protein
//     point p (HP1..HP5, HD1, HD2);
//   * two vertices are compatible (an edge of the binding interaction graph)
//     when |D_lig - D_prot| <= tau + 2*eps = 0.1 + 2*3.3 = 6.7 Angstrom, with
//     the pairwise distance tables below (hundredths of an Angstrom);
//   * vertex weights from the pharmacophore potential table: hp-HP 0.0504,
//     hp-HD 0.1453, ha-HP 0.2317, ha-HD 0.6686;
//   * energy E = -A sum w_i x_i + P/2 sum Jbar_ij x_i x_j with A = 10, P = 18,
//     Jbar the complement graph.
// Array mapping: each p-bit drives PEN = 18 wordlines (rows 18j..18j+17); a
// complement edge (i,j) is 18 "-1" cell pairs on bitline pair i in p-bit j's
// rows; h_i = round(A*w_i) in {1, 2, 7} always-on rows hold "+1"; then 18
// positive and 18 negative random-bias rows. 799 of 1152 rows are used.
package docking_pkg;
  import pcomp_pkg::*;

  localparam int NV = 42, PEN = 18, NH = 7;
  localparam int ROW_H  = NV * PEN;      // 756: first always-on row
  localparam int ROW_BP = ROW_H + NH;    // 763: positive bias rows
  localparam int ROW_BN = ROW_BP + 18;   // 781: negative bias rows
  localparam int ROWS_USED = ROW_BN + 18;
  localparam int MWC_W4 = 8702;          // weight of the optimum * 10^4

  localparam int DL [6][6] = '{'{0, 882, 2256, 2103, 2225, 2173}, '{882, 0, 1536, 1280, 1890, 1346},
                              '{2256, 1536, 0, 1615, 1112, 699}, '{2103, 1280, 1615, 0, 2512, 1175},
                              '{2225, 1890, 1112, 2512, 0, 1715}, '{2173, 1346, 699, 1175, 1715, 0}};
  localparam int DP [7][7] = '{'{0, 1044, 2056, 2219, 2131, 2484, 1802}, '{1044, 0, 1095, 1488, 2007, 1489, 2261},
                              '{2056, 1095, 0, 1774, 2272, 1173, 2850}, '{2219, 1488, 1774, 0, 3259, 1416, 3664},
                              '{2131, 2007, 2272, 3259, 0, 2442, 1199}, '{2484, 1489, 1173, 1416, 2442, 0, 3254},
                              '{1802, 2261, 2850, 3664, 1199, 3254, 0}};

  function automatic int iabs(int x);
    return (x < 0) ? -x : x;
  endfunction

  function automatic bit adj(int a, int b);
    return (a != b) && iabs(DL[a / 7][b / 7] - DP[a % 7][b % 7]) <= 670;
  endfunction

  function automatic int w4(int a);
    bit lig_ha, prot_hd;
    lig_ha  = (a / 7) == 5;
    prot_hd = (a % 7) >= 5;
    return lig_ha ? (prot_hd ? 6686 : 2317) : (prot_hd ? 1453 : 504);
  endfunction

  function automatic int h(int a);
    return (w4(a) * 10 + 5000) / 10000;
  endfunction

  function automatic int conflicts(int i, logic [511:0] x);
    int c = 0;
    for (int j = 0; j < NV; j++) if (j != i && x[j] && !adj(i, j)) c++;
    return c;
  endfunction

  function automatic bit is_clique(logic [511:0] x);
    for (int i = 0; i < NV; i++) if (x[i] && conflicts(i, x) != 0) return 0;
    return x[511:NV] == '0;
  endfunction

  function automatic int weight4(logic [511:0] x);
    int s = 0;
    for (int i = 0; i < NV; i++) if (x[i]) s += w4(i);
    return s;
  endfunction

  function automatic string members(logic [511:0] x);
    string s = "";
    for (int i = 0; i < NV; i++) if (x[i]) s = {s, $sformatf(" %0d", i + 1)};
    return s;
  endfunction

  // wordline source of row r
  function automatic wl_map_t row_map(int r);
    if (r < ROW_H)       return '{src: SRC_PBIT,     idx: MAP_IDX_W'(r / PEN)};
    else if (r < ROW_BP) return '{src: SRC_ON,       idx: '0};
    else if (r < ROW_BN) return '{src: SRC_BIAS_POS, idx: MAP_IDX_W'(r - ROW_BP)};
    else                 return '{src: SRC_BIAS_NEG, idx: MAP_IDX_W'(r - ROW_BN)};
  endfunction

  // cell pair at (row r, bitline pair c)
  function automatic cell_pair_t cell_of(int r, int c);
    if (r < ROW_H)       return (r / PEN != c && !adj(c, r / PEN)) ? CELL_NEG : CELL_ZERO;
    else if (r < ROW_BP) return (r - ROW_H < h(c)) ? CELL_POS : CELL_ZERO;
    else if (r < ROW_BN) return CELL_POS;
    else                 return CELL_NEG;
  endfunction

endpackage
