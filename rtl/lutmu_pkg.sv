// lutmu_pkg: types and constants shared by the LUT-MU modules.
//
// The LUT-MU is loaded with the results of offline training (split values,
// pruned LUT contents, biases and activation thresholds) through one write
// bus, carried as the struct cfg_wr_t. Each module decodes the writes that
// target it; the bus is a plain write-only stream, one word per cycle, with
// no back-pressure. The bus itself, its address map and its 32-bit data field
// are this design's own choice: the paper keeps the tables in ROMs filled at
// configuration time and does not describe how they are filled.
//
// Address map (linear, per target):
//   CFG_SPLIT  : c*(2^I-1) + node   node in heap order: level l, path p -> 2^l-1+p
//   CFG_LUT    : (o*C + c)*2^I + g  output element o, codebook c, prototype ID g
//   CFG_BIAS   : o
//   CFG_THRESH : o*(2^W-1) + t      t-th threshold of output element o
// Data is right-aligned; LUT entries, biases and thresholds are two's complement.
package lutmu_pkg;

  typedef enum logic [1:0] {
    CFG_SPLIT  = 2'd0,
    CFG_LUT    = 2'd1,
    CFG_BIAS   = 2'd2,
    CFG_THRESH = 2'd3
  } cfg_target_e;

  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [31:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  localparam cfg_wr_t CFG_IDLE = '{we: 1'b0, target: CFG_SPLIT, addr: '0, data: '0};

endpackage
