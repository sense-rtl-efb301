// sense_pkg: types and constants shared by the blocks of the Sense sparse-CNN
// systolic accelerator.
//
// Data words are 16-bit two's-complement values, and so are stored partial sums.
// Location info ((row,col) inside a tile) uses LOCW-bit coordinates, so tiles
// and kernels may be up to 16 x 16. A PE row is fed by a stream of tokens: a
// token is either a weight, addressed to one PE column, or an IFM non-zero
// element (NZE) that every PE of the row uses. The token format, the
// coordinate width and the configuration record are choices of this design;
// the 16-bit data and Psum widths and the 64-entry Psum buffer follow the paper.
package sense_pkg;

  parameter int DW         = 16;  // IFM, weight and Psum width
  parameter int LOCW       = 4;   // width of one location coordinate
  parameter int COLIDW     = 6;   // column id carried by weight tokens (N_PE <= 64)
  parameter int PSUM_DEPTH = 64;  // 64 x 16b LUT RAM per PE
  parameter int PAW        = 6;   // Psum buffer address width
  parameter int MAW        = 32;  // DRAM word address width
  parameter int MDW        = 32;  // DRAM word width: two 16-bit halves
  parameter int CHW        = 12;  // channel number width (up to 4096 channels)

  typedef logic [DW-1:0] data_t;

  // One token on the horizontal (row) pipeline of the PE array.
  typedef struct packed {
    logic              valid;
    logic              is_wgt;   // 1: weight for column `col`, 0: IFM NZE
    logic [COLIDW-1:0] col;
    logic [DW-1:0]     data;
    logic [LOCW-1:0]   r;
    logic [LOCW-1:0]   c;
  } tok_t;

  // Address token travelling up a PE column with the cross-PE partial sum.
  typedef struct packed {
    logic           valid;
    logic [PAW-1:0] addr;
  } drain_t;

  typedef enum logic {RIF = 1'b0, RWF = 1'b1} reuse_e;

  // Configuration of one CONV layer, as produced by the offline mapping step.
  typedef struct packed {
    logic [CHW-1:0]  ci;          // input channels
    logic [CHW-1:0]  co;          // output channels
    logic [7:0]      t_row;       // IFM/OFM tiles along the rows
    logic [7:0]      t_col;       // IFM/OFM tiles along the columns
    logic [LOCW:0]   ih;          // IFM sub-tile height (with halo)
    logic [LOCW:0]   iw;          // IFM sub-tile width (with halo)
    logic [LOCW:0]   kh;          // kernel height
    logic [LOCW:0]   kw;          // kernel width
    logic [7:0]      nzew_max;    // N_NZEW_MAX of the pruned layer
    logic            sparse_mode; // 1 sparse, 0 dense
    logic            relu_en;
    logic            pool_en;     // 2x2 max pooling, stride 2
    logic            use_cluster; // read IFM channels through the sorted index
    reuse_e          reuse;       // RIF or RWF loop order
    logic [MAW-1:0]  i_base;      // compressed IFM blocks (tile, ic)
    logic [MAW-1:0]  w_base;      // compressed kernels (oc, ic)
    logic [MAW-1:0]  o_base;      // compressed OFM blocks (tile, oc)
    logic [15:0]     i_stride;    // words per IFM block slot
    logic [15:0]     w_stride;    // words per kernel slot
    logic [15:0]     o_stride;    // words per OFM block slot
  } layer_cfg_t;

endpackage
