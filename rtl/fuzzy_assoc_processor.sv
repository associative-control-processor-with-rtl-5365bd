// fuzzy_assoc_processor: fuzzy control processor with a rigid structure.
//
// The processor recognises the current situation of a controlled system and
// outputs the control value fixed for it in advance:
//   1. N_IN linguistic converters (LC) turn the numeric inputs x[n] into
//      linguistic terms, one symbol each, in parallel.
//   2. The control device (CD) presents the chain of these symbols, input 0
//      first, to the PAMU, which compares it with every etalon chain at once
//      ("complete coincidence"), drops symbols that no live etalon accepts
//      and reports the first etalon matched in full.
//   3. The control-signal block maps that etalon to its class k and reads the
//      control value u_k.
// The division into LC, PAMU and control-signal block and the stored tables
// follow the paper's processor scheme; feeding the converters' terms to the
// PAMU as its input chain, the configuration bus and the handshake are this
// design's choices. CORRECTION (default 1) selects the PAMU with
// correction; 0 builds the basic PAMU, for etalons all N_IN symbols long.
//
// Interface: cfg writes every table (see assoc_pkg). x_valid with x starts a
// decision when busy is 0 (ignored otherwise). u_valid pulses with u, k, hit,
// etalon, noise (the number of chain symbols dropped as interference) and
// s_j (the detector outputs S_j read at the end of the comparison).
// Timing: u_valid rises 6 + steps clocks after the edge that accepts x_valid
// (converters 1, CD start 1, INIT 1, one per symbol presented, the closing
// STEP 1, FINISH 1, control-signal block 1), steps <= N_IN.
module fuzzy_assoc_processor
  import assoc_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned GAMMA = 8,
  parameter int unsigned I_PTS = 16,
  parameter int unsigned J_T   = 4,
  parameter int unsigned NSYM  = 5,
  parameter int unsigned N_ET  = 3,
  parameter int unsigned M_LEN = 5,
  parameter int unsigned K_CL  = 3,
  parameter bit          CORRECTION = 1'b1,
  parameter int unsigned SYM_W = (NSYM > 1) ? $clog2(NSYM) : 1,
  parameter int unsigned ET_W  = (N_ET > 1) ? $clog2(N_ET) : 1,
  parameter int unsigned K_W   = (K_CL > 1) ? $clog2(K_CL) : 1,
  parameter int unsigned LEN_W = $clog2(N_IN + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  cfg_wr_t                          cfg,
  input  logic                             x_valid,
  input  logic [N_IN-1:0][GAMMA-1:0]       x,
  output logic                             busy,
  output logic [N_IN-1:0][SYM_W-1:0]       terms,
  output logic                             u_valid,
  output logic [GAMMA-1:0]                 u,
  output logic [K_W-1:0]                   k,
  output logic                             hit,
  output logic [ET_W-1:0]                  etalon,
  output logic [LEN_W-1:0]                 noise,
  output logic [N_ET-1:0]                  s_j
);

  // ---------------- linguistic converters ----------------
  logic [N_IN-1:0] lc_valid;
  logic            accept;
  logic            run;

  assign accept = x_valid && !run;

  for (genvar n = 0; n < N_IN; n++) begin : g_lc
    linguistic_converter #(
      .GAMMA(GAMMA), .I_PTS(I_PTS), .J_T(J_T), .J0(NSYM), .UNIT(n), .SYM_W(SYM_W)
    ) u_lc (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg      (cfg),
      .x_valid  (accept),
      .x        (x[n]),
      .sym_valid(lc_valid[n]),
      .sym      (terms[n]),
      .pt       (),
      .degree   ()
    );
  end

  // ---------------- control device + PAMU ----------------
  pamu_flash_t     flash;
  logic            nu, kst, sv, dd, k1, k2;
  logic [SYM_W-1:0] sym;
  logic [N_ET-1:0] s, end_hit, ie;
  logic [M_LEN:0]  row;
  logic            cd_busy, cd_done, cd_matched;
  logic [ET_W-1:0] cd_etalon;

  assign flash.we     = cfg.we && (cfg.sel == CFG_FLASH);
  assign flash.is_end = cfg.data[8];
  assign flash.col    = cfg.addr[15:8];
  assign flash.row    = cfg.addr[7:0];
  assign flash.code   = cfg.data[7:0];

  pamu_control #(
    .CHAIN_MAX(N_IN), .NSYM(NSYM), .N_ET(N_ET), .SYM_W(SYM_W), .LEN_W(LEN_W), .ET_W(ET_W),
    .CORRECTION(CORRECTION)
  ) u_cd (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (lc_valid[0]),
    .chain    (terms),
    .chain_len(LEN_W'(N_IN)),
    .nu       (nu),
    .k        (kst),
    .sym_valid(sv),
    .sym      (sym),
    .d        (dd),
    .k1       (k1),
    .k2       (k2),
    .end_hit  (end_hit),
    .s        (s),
    .busy     (cd_busy),
    .done     (cd_done),
    .matched  (cd_matched),
    .etalon   (cd_etalon),
    .s_out    (s_j),
    .noise_cnt(noise)
  );

  pamu #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM), .SYM_W(SYM_W), .CORRECTION(CORRECTION)) u_pamu (
    .clk      (clk),
    .rst_n    (rst_n),
    .flash    (flash),
    .nu       (nu),
    .k        (kst),
    .sym_valid(sv),
    .sym      (sym),
    .d        (dd),
    .k1       (k1),
    .k2       (k2),
    .s        (s),
    .end_hit  (end_hit),
    .ie       (ie),
    .row      (row)
  );

  // ---------------- control signal block ----------------
  control_signal_block #(.N_ET(N_ET), .K_CL(K_CL), .GAMMA(GAMMA), .ET_W(ET_W), .K_W(K_W)) u_cs (
    .clk    (clk),
    .rst_n  (rst_n),
    .cfg    (cfg),
    .req    (cd_done),
    .matched(cd_matched),
    .etalon (cd_etalon),
    .u_valid(u_valid),
    .u      (u),
    .k      (k),
    .hit    (hit)
  );

  assign etalon = cd_etalon;

  // One decision at a time: busy from acceptance until u_valid rises.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       run <= 1'b0;
    else if (accept)  run <= 1'b1;
    else if (cd_done) run <= 1'b0;
  end

  assign busy = run;

endmodule
