// clp_pkg: types and constants shared by the convolutional layer processors
// (CLPs) of the Multi-CLP accelerator.
//
// Feature maps, weights and biases are IEEE-754 single-precision words, the
// format of the accelerator's main configuration. Off-chip memory is word
// addressed. A layer descriptor (layer_desc_t) carries the CONV layer shape
// <N, M, R, C, K, S>, its tiling factors <Tr, Tc> and the base addresses of its
// arrays in off-chip memory; the host writes one per layer assigned to a CLP.
// The tile descriptor (tile_t) is what the controller hands from the load
// sequencer to the compute and write-back stages: the tile origin
// <r, c, m, n>, the extent of partial tiles and first/last input-map-tile flags.
// Field widths are this design's choice; the paper does not give them.
package clp_pkg;

  localparam int unsigned DW = 32;  // data word: FP32
  localparam int unsigned AW = 32;  // off-chip word address
  localparam int unsigned CW = 16;  // loop counters and layer dimensions
  localparam int unsigned GW = 4;   // CLP id on the shared memory port

  typedef logic [DW-1:0] word_t;
  typedef logic [AW-1:0] addr_t;
  typedef logic [CW-1:0] cnt_t;

  typedef struct packed {
    cnt_t  n;       // input feature maps N
    cnt_t  m;       // output feature maps M
    cnt_t  r;       // output rows R
    cnt_t  c;       // output columns C
    cnt_t  k;       // kernel size K
    cnt_t  s;       // stride S
    cnt_t  tr;      // row tiling factor Tr
    cnt_t  tc;      // column tiling factor Tc
    addr_t if_base; // IF[n][x][y] at if_base + (n*IH + x)*IW + y
    addr_t w_base;  // W[m][n][i][j] at w_base + ((m*N + n)*K + i)*K + j
    addr_t b_base;  // B[m] at b_base + m
    addr_t of_base; // OF[m][r][c] at of_base + (m*R + r)*C + c
  } layer_desc_t;

  typedef struct packed {
    layer_desc_t l;
    cnt_t r0, c0, m0, n0;          // tile origin
    cnt_t tr_ext, tc_ext;          // rows/columns of this tile (<= Tr, Tc)
    cnt_t m_ext, n_ext;            // output/input maps of this tile (<= Tm, Tn)
    logic first_n, last_n;         // first / last input-map tile of an OF tile
  } tile_t;

  // Rows (or columns) of the input window read for a tile of `ext` outputs.
  function automatic cnt_t in_span(cnt_t ext, cnt_t k, cnt_t s);
    return cnt_t'(k + s * (ext - 1'b1));
  endfunction


endpackage
