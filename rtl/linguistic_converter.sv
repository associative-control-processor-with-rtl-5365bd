// linguistic_converter: linguistic converter (LC) of one input variable.
//
// Turns a GAMMA-bit number into the linguistic term (a symbol for the PAMU):
//   1. Rg: the input register, loaded on x_valid.
//   2. Coordinate block: I_PTS ascending grid points of the universal set are
//      compared with x in parallel; the point index i is that of the last
//      grid point not above x (0 if x is below all of them).
//   3. Fuzzy value: row i of a table holds the fuzzy set A'(i) = (a'_1..a'_J)
//      and, in a second table, its complement (abar'_1..abar'_J).
//   4. Similarity: for each of J0 reference sets A_j0 (stored with their
//      complements) the degree of fuzzy equality
//         mu(A_j0, A') = min_j max( min(a_j0j, a'_j), min(abar_j0j, abar'_j) )
//      is formed, all J0 in parallel.
//   5. Line of indication: the j0 with the largest degree wins (lowest index
//      on a tie) and is the output symbol.
// The parts and the stored tables (grid points, A', A'-complement, A,
// A-complement) are the ones the paper's processor scheme shows; the grid
// search, the similarity formula and the tie rule are this design's reading,
// as the paper gives no formula for them. All membership values are GAMMA-bit
// unsigned numbers with 2^GAMMA-1 standing for 1.
//
// Tables are written through cfg (sel CFG_COORD, CFG_MEMB, CFG_MEMB_C,
// CFG_REF, CFG_REF_C) when cfg.unit == UNIT.
// Timing: sym_valid follows x_valid by 2 clocks; one conversion per clock.
module linguistic_converter
  import assoc_pkg::*;
#(
  parameter int unsigned GAMMA = 8,
  parameter int unsigned I_PTS = 16,
  parameter int unsigned J_T   = 4,
  parameter int unsigned J0    = 5,
  parameter int unsigned UNIT  = 0,
  parameter int unsigned SYM_W = (J0 > 1) ? $clog2(J0) : 1,
  parameter int unsigned PT_W  = (I_PTS > 1) ? $clog2(I_PTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             x_valid,
  input  logic [GAMMA-1:0] x,
  output logic             sym_valid,
  output logic [SYM_W-1:0] sym,
  output logic [PT_W-1:0]  pt,
  output logic [GAMMA-1:0] degree
);

  logic [GAMMA-1:0] grid  [I_PTS];
  logic [GAMMA-1:0] memb  [I_PTS][J_T];
  logic [GAMMA-1:0] membc [I_PTS][J_T];
  logic [GAMMA-1:0] refa  [J0][J_T];
  logic [GAMMA-1:0] refc  [J0][J_T];

  logic [GAMMA-1:0] rg;
  logic             v1;

  logic             mine;
  int unsigned      a_hi, a_lo;

  assign mine = cfg.we && (32'(cfg.unit) == UNIT);
  assign a_hi = 32'(cfg.addr) / J_T;
  assign a_lo = 32'(cfg.addr) % J_T;

  // Table writes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < I_PTS; i++) begin
        grid[i] <= '0;
        for (int j = 0; j < J_T; j++) begin
          memb[i][j]  <= '0;
          membc[i][j] <= '0;
        end
      end
      for (int r = 0; r < J0; r++)
        for (int j = 0; j < J_T; j++) begin
          refa[r][j] <= '0;
          refc[r][j] <= '0;
        end
    end else if (mine) begin
      unique case (cfg.sel)
        CFG_COORD:  if (32'(cfg.addr) < I_PTS) grid[PT_W'(cfg.addr)] <= GAMMA'(cfg.data);
        CFG_MEMB:   if (a_hi < I_PTS) memb[a_hi][a_lo]  <= GAMMA'(cfg.data);
        CFG_MEMB_C: if (a_hi < I_PTS) membc[a_hi][a_lo] <= GAMMA'(cfg.data);
        CFG_REF:    if (a_hi < J0)    refa[a_hi][a_lo]  <= GAMMA'(cfg.data);
        CFG_REF_C:  if (a_hi < J0)    refc[a_hi][a_lo]  <= GAMMA'(cfg.data);
        default: ;
      endcase
    end
  end

  // Rg: input register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rg <= '0;
      v1 <= 1'b0;
    end else begin
      v1 <= x_valid;
      if (x_valid) rg <= x;
    end
  end

  // Coordinate block: count the grid points not above x.
  logic [PT_W-1:0] pidx;
  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int i = 0; i < I_PTS; i++)
      if (grid[i] <= rg) cnt++;
    pidx = (cnt == 0) ? '0 : PT_W'(cnt - 1);
  end

  // Similarity with every reference set, then the best one.
  logic [GAMMA-1:0] sim [J0];
  always_comb begin
    for (int r = 0; r < J0; r++) begin
      sim[r] = '1;
      for (int j = 0; j < J_T; j++) begin
        logic [GAMMA-1:0] m1, m2, mx;
        m1 = (refa[r][j] < memb[pidx][j])  ? refa[r][j] : memb[pidx][j];
        m2 = (refc[r][j] < membc[pidx][j]) ? refc[r][j] : membc[pidx][j];
        mx = (m1 > m2) ? m1 : m2;
        if (mx < sim[r]) sim[r] = mx;
      end
    end
  end

  logic [SYM_W-1:0] best;
  logic [GAMMA-1:0] best_deg;
  always_comb begin
    best     = '0;
    best_deg = sim[0];
    for (int r = 1; r < J0; r++)
      if (sim[r] > best_deg) begin
        best     = SYM_W'(r);
        best_deg = sim[r];
      end
  end

  // Output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym_valid <= 1'b0;
      sym       <= '0;
      pt        <= '0;
      degree    <= '0;
    end else begin
      sym_valid <= v1;
      if (v1) begin
        sym    <= best;
        pt     <= pidx;
        degree <= best_deg;
      end
    end
  end

endmodule
