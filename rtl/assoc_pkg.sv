// assoc_pkg: types shared by the associative fuzzy processor.
//
// The processor keeps all of its knowledge in tables: the grid points of the
// coordinate block, the fuzzy values and reference sets of each linguistic
// converter, the etalon chains "flashed" into the PAMU matrix and the table of
// control values. The paper wires these in at manufacture; this design loads
// them through one write bus, cfg_wr_t, whose `sel` field names the table.
// The bus and its encoding are this design's own choice.
//
// pamu_flash_t is the narrower bus the PAMU matrix itself sees: one write
// either stores the symbol code of the deciding element (row, col) or, with
// is_end set, places the end-description gate B1 of column col at row `row`.
package assoc_pkg;

  // Table selector of the configuration bus.
  typedef enum logic [2:0] {
    CFG_COORD  = 3'd0,  // coordinate block grid point: addr = i
    CFG_MEMB   = 3'd1,  // fuzzy value A'(i) element j: addr = i*J_T + j
    CFG_MEMB_C = 3'd2,  // its complement
    CFG_REF    = 3'd3,  // reference set A_j0 element j: addr = j0*J_T + j
    CFG_REF_C  = 3'd4,  // its complement
    CFG_FLASH  = 3'd5,  // PAMU matrix: addr = {col[7:0], row[7:0]}, data = {is_end, code[7:0]}
    CFG_CLASS  = 3'd6,  // etalon -> class: addr = etalon, data = k
    CFG_UTAB   = 3'd7   // control value u_k: addr = k
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [3:0]  unit;   // which linguistic converter (CFG_COORD .. CFG_REF_C)
    logic [15:0] addr;
    logic [15:0] data;
  } cfg_wr_t;

  typedef struct packed {
    logic       we;
    logic       is_end;  // 1: place B1 of column col at row; 0: DE code
    logic [7:0] col;
    logic [7:0] row;
    logic [7:0] code;
  } pamu_flash_t;

endpackage
