// fuzzy_assoc_processor_tb: end-to-end test of the processor at its default
// parameters (two inputs, 8-bit words, 16 grid points, fuzzy sets of 4
// elements, 5 terms, 3 etalons of up to 5 symbols, 3 classes).
//
// For each of several random configurations it writes the converters'
// tables, flashes three etalon chains over the term alphabet (one of them a
// single symbol, so that a comparison can complete before the chain ends),
// fills the class and control-value tables, then applies random inputs. The
// expected terms, the PAMU result (etalon, noise count), the class, u and the
// latency (6 + symbols presented clocks) are computed here independently.
// It counts how often each mechanism occurred - complete match, early
// completion on a short etalon, a symbol dropped as interference, a chain
// that matches nothing, an input ignored while busy - and fails if one never
// did.
module fuzzy_assoc_processor_tb;
  import assoc_pkg::*;
  localparam int N_IN = 2, GAMMA = 8, I_PTS = 16, J_T = 4, NSYM = 5, N_ET = 3, M_LEN = 5, K_CL = 3;
  localparam int SYM_W = 3, ET_W = 2, K_W = 2, LEN_W = 2;

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic x_valid, busy, u_valid, hit;
  logic [N_IN-1:0][GAMMA-1:0] x;
  logic [N_IN-1:0][SYM_W-1:0] terms;
  logic [GAMMA-1:0] u;
  logic [K_W-1:0] k;
  logic [ET_W-1:0] etalon;
  logic [LEN_W-1:0] noise;
  logic [N_ET-1:0] s_j;

  int grid [N_IN][I_PTS];
  int ma [N_IN][I_PTS][J_T];
  int mc [N_IN][I_PTS][J_T];
  int ra [N_IN][NSYM][J_T];
  int rc [N_IN][NSYM][J_T];
  int et [N_ET][M_LEN];
  int len [N_ET];
  int cls [N_ET];
  int ut [K_CL];

  int checks = 0, failures = 0;
  int n_match = 0, n_early = 0, n_noise = 0, n_nomatch = 0, n_ignored = 0;

  fuzzy_assoc_processor dut (
    .clk, .rst_n, .cfg, .x_valid, .x, .busy, .terms, .u_valid, .u, .k, .hit, .etalon, .noise, .s_j);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input cfg_sel_e sel, input int unit, a, dv);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, unit: 4'(unit), addr: 16'(a), data: 16'(dv)};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic int mn(int a, int b); return a < b ? a : b; endfunction
  function automatic int mxf(int a, int b); return a > b ? a : b; endfunction

  function automatic int term_of(int n, int xv);
    int cnt, i, best, bdeg;
    cnt = 0;
    for (int q = 0; q < I_PTS; q++) if (grid[n][q] <= xv) cnt++;
    i = (cnt == 0) ? 0 : cnt - 1;
    best = 0; bdeg = -1;
    for (int r = 0; r < NSYM; r++) begin
      int sim;
      sim = 255;
      for (int j = 0; j < J_T; j++)
        sim = mn(sim, mxf(mn(ra[n][r][j], ma[n][i][j]), mn(rc[n][r][j], mc[n][i][j])));
      if (sim > bdeg) begin bdeg = sim; best = r; end
    end
    return best;
  endfunction

  task automatic configure();
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < N_IN; n++) begin
      for (int q = 0; q < I_PTS; q++) begin grid[n][q] = q * 16; wr(CFG_COORD, n, q, grid[n][q]); end
      for (int q = 0; q < I_PTS; q++)
        for (int j = 0; j < J_T; j++) begin
          ma[n][q][j] = $urandom % 256; mc[n][q][j] = 255 - ma[n][q][j];
          wr(CFG_MEMB, n, q * J_T + j, ma[n][q][j]);
          wr(CFG_MEMB_C, n, q * J_T + j, mc[n][q][j]);
        end
      for (int r = 0; r < NSYM; r++)
        for (int j = 0; j < J_T; j++) begin
          ra[n][r][j] = $urandom % 256; rc[n][r][j] = 255 - ra[n][r][j];
          wr(CFG_REF, n, r * J_T + j, ra[n][r][j]);
          wr(CFG_REF_C, n, r * J_T + j, rc[n][r][j]);
        end
    end
    // etalons: two of length 2 and one of length 1 (a situation decided by
    // the first input alone)
    for (int e = 0; e < N_ET; e++) begin
      len[e] = (e == N_ET - 1) ? 1 : 2;
      for (int q = 0; q < M_LEN; q++) et[e][q] = (q < len[e]) ? int'($urandom % NSYM) : -1;
      for (int q = 0; q < len[e]; q++) wr(CFG_FLASH, 0, (e << 8) | q, et[e][q]);
      wr(CFG_FLASH, 0, (e << 8) | len[e], 256);
      cls[e] = $urandom % K_CL;
      wr(CFG_CLASS, 0, e, cls[e]);
    end
    for (int c = 0; c < K_CL; c++) begin ut[c] = $urandom % 256; wr(CFG_UTAB, c, c, ut[c]); end
  endtask

  task automatic decide(input int x0, x1);
    int t [N_IN];
    int pos, presented, nz, exp_et, cycles;
    logic [N_ET-1:0] live, colm;
    logic fin, exp_m;
    t[0] = term_of(0, x0);
    t[1] = term_of(1, x1);
    live = '1; pos = 0; presented = 0; nz = 0; fin = 0;
    while (!fin) begin
      logic c2;
      c2 = 0;
      for (int j = 0; j < N_ET; j++) if (live[j] && pos == len[j]) c2 = 1;
      if (c2 || presented >= N_IN) fin = 1;
      else begin
        for (int j = 0; j < N_ET; j++) colm[j] = (pos < len[j]) && (et[j][pos] == t[presented]);
        if (|(colm & live)) begin live &= colm; pos++; end
        else nz++;
        presented++;
      end
    end
    exp_m = 0; exp_et = 0;
    for (int j = N_ET - 1; j >= 0; j--) if (live[j] && pos == len[j]) begin exp_m = 1; exp_et = j; end

    @(negedge clk);
    x[0] = GAMMA'(x0); x[1] = GAMMA'(x1); x_valid = 1;
    @(posedge clk);
    @(negedge clk);
    x_valid = 0;
    cycles = 0;
    // a second request while busy must be ignored
    if ($urandom % 4 == 0) begin
      x_valid = 1; x = '1;
      @(posedge clk); cycles++;
      @(negedge clk); x_valid = 0;
      n_ignored++;
    end
    while (!u_valid && cycles < 100) begin @(posedge clk); cycles++; #1; end
    chk(cycles == 6 + presented, $sformatf("latency %0d clocks, expected %0d", cycles, 6 + presented));
    chk(terms[0] === SYM_W'(t[0]) && terms[1] === SYM_W'(t[1]),
        $sformatf("terms %0d %0d expected %0d %0d", terms[0], terms[1], t[0], t[1]));
    chk(hit === exp_m, $sformatf("hit=%b expected %b (terms %0d %0d)", hit, exp_m, t[0], t[1]));
    chk(noise === LEN_W'(nz), $sformatf("noise=%0d expected %0d", noise, nz));
    chk(s_j === live, $sformatf("S_j=%b expected %b", s_j, live));
    if (exp_m) begin
      chk(etalon === ET_W'(exp_et), $sformatf("etalon=%0d expected %0d", etalon, exp_et));
      chk(k === K_W'(cls[exp_et]) && u === GAMMA'(ut[cls[exp_et]]),
          $sformatf("k=%0d u=%0d expected %0d %0d", k, u, cls[exp_et], ut[cls[exp_et]]));
      n_match++;
      if (presented < N_IN) n_early++;
    end else begin
      chk(u === '0, "u is 0 without a match");
      n_nomatch++;
    end
    if (nz > 0) n_noise++;
    @(negedge clk);
    chk(!busy, "idle after u_valid");
  endtask

  initial begin
    cfg = '0; x_valid = 0; x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 6; c++) begin
      configure();
      for (int t = 0; t < 60; t++) begin
        int x0, x1;
        // half the time steer the inputs towards a flashed etalon: pick
        // grid cells at random until the terms match the chain
        x0 = $urandom % 256; x1 = $urandom % 256;
        if ($urandom % 2 == 0) begin
          int e;
          e = $urandom % N_ET;
          for (int tries = 0; tries < 64; tries++) begin
            if (term_of(0, x0) == et[e][0] && (len[e] < 2 || term_of(1, x1) == et[e][1])) break;
            x0 = $urandom % 256; x1 = $urandom % 256;
          end
        end
        decide(x0, x1);
      end
    end
    $display("matched %0d (early %0d), with noise %0d, no match %0d, ignored while busy %0d",
             n_match, n_early, n_noise, n_nomatch, n_ignored);
    chk(n_match > 0, "complete match occurred");
    chk(n_early > 0, "early completion occurred");
    chk(n_noise > 0, "interference skip occurred");
    chk(n_nomatch > 0, "no-match occurred");
    chk(n_ignored > 0, "busy rejection occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
