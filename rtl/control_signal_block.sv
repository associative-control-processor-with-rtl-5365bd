// control_signal_block: control signal forming block (CS).
//
// After a comparison the PAMU names the etalon (reference situation) that was
// fully matched. Several reference situations may share one solution, so the
// etalon is first mapped to its class k (table of N_ET entries), and the
// GAMMA-bit control value u_k is read from a table of K_CL entries. Without a
// match, hit is 0 and u is 0. The class table and the no-match value are
// this design's choice; the u_k table is the paper's.
//
// Tables are written through cfg (sel CFG_CLASS: addr = etalon, data = k;
// sel CFG_UTAB: addr = k, data = u_k).
// Timing: u_valid, u, k and hit are registered, one clock after req.
module control_signal_block
  import assoc_pkg::*;
#(
  parameter int unsigned N_ET  = 3,
  parameter int unsigned K_CL  = 3,
  parameter int unsigned GAMMA = 8,
  parameter int unsigned ET_W  = (N_ET > 1) ? $clog2(N_ET) : 1,
  parameter int unsigned K_W   = (K_CL > 1) ? $clog2(K_CL) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             req,
  input  logic             matched,
  input  logic [ET_W-1:0]  etalon,
  output logic             u_valid,
  output logic [GAMMA-1:0] u,
  output logic [K_W-1:0]   k,
  output logic             hit
);

  logic [K_W-1:0]   cls  [N_ET];
  logic [GAMMA-1:0] utab [K_CL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_ET; e++) cls[e] <= '0;
      for (int c = 0; c < K_CL; c++) utab[c] <= '0;
    end else if (cfg.we) begin
      if (cfg.sel == CFG_CLASS && 32'(cfg.addr) < N_ET && 32'(cfg.data) < K_CL)
        cls[ET_W'(cfg.addr)] <= K_W'(cfg.data);
      if (cfg.sel == CFG_UTAB && 32'(cfg.addr) < K_CL)
        utab[K_W'(cfg.addr)] <= GAMMA'(cfg.data);
    end
  end

  logic [K_W-1:0] kc;
  assign kc = (32'(etalon) < N_ET) ? cls[etalon] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_valid <= 1'b0;
      u       <= '0;
      k       <= '0;
      hit     <= 1'b0;
    end else begin
      u_valid <= req;
      if (req) begin
        hit <= matched;
        k   <= matched ? kc : '0;
        u   <= matched ? utab[kc] : '0;
      end
    end
  end

endmodule
