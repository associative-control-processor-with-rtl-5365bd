// fig4_flashing_tb: the worked flashing example run through the whole
// processor. The PAMU holds the three etalon sets E1 = (a,b,c,d,e),
// E2 = (e,a,b) and E3 = (b,a,d,e); the processor is built with five input
// variables so that a chain can be as long as E1 (the default build has two).
//
// Each converter is loaded so that grid cell i (x in 16*i .. 16*i+15) is a
// crisp fuzzy value equal to reference set (i mod 5), hence term i mod 5:
// the test picks x to spell a chosen chain of terms a..e. Directed chains
// (each etalon, each with an interference symbol, no match) and random ones
// are checked against a model of the comparison; the class of Ek is k and
// u_k = 10 * (k + 1).
module fig4_flashing_tb;
  import assoc_pkg::*;
  localparam int N_IN = 5, GAMMA = 8, I_PTS = 16, J_T = 4, NSYM = 5, N_ET = 3, M_LEN = 5, K_CL = 3;
  localparam int SYM_W = 3, ET_W = 2, K_W = 2, LEN_W = 3;

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

  int et [N_ET][M_LEN];
  int len [N_ET];
  int checks = 0, failures = 0;
  int hits [N_ET];
  int n_noise = 0, n_nomatch = 0;

  fuzzy_assoc_processor #(.N_IN(N_IN)) dut (
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

  // reference set r: element r is 1 (r < J_T), all others 0; set 4 is empty
  function automatic int refv(int r, int j); return (r == j) ? 255 : 0; endfunction

  task automatic configure();
    for (int n = 0; n < N_IN; n++) begin
      for (int q = 0; q < I_PTS; q++) wr(CFG_COORD, n, q, q * 16);
      for (int q = 0; q < I_PTS; q++)
        for (int j = 0; j < J_T; j++) begin
          wr(CFG_MEMB, n, q * J_T + j, refv(q % NSYM, j));
          wr(CFG_MEMB_C, n, q * J_T + j, 255 - refv(q % NSYM, j));
        end
      for (int r = 0; r < NSYM; r++)
        for (int j = 0; j < J_T; j++) begin
          wr(CFG_REF, n, r * J_T + j, refv(r, j));
          wr(CFG_REF_C, n, r * J_T + j, 255 - refv(r, j));
        end
    end
    for (int e = 0; e < N_ET; e++) begin
      for (int q = 0; q < len[e]; q++) wr(CFG_FLASH, 0, (e << 8) | q, et[e][q]);
      wr(CFG_FLASH, 0, (e << 8) | len[e], 256);
      wr(CFG_CLASS, 0, e, e);
      wr(CFG_UTAB, 0, e, 10 * (e + 1));
    end
  endtask

  task automatic decide(input int ch[N_IN], input int expect_et);
    int pos, presented, nz, exp_et, cycles;
    logic [N_ET-1:0] live, colm;
    logic fin, exp_m;
    live = '1; pos = 0; presented = 0; nz = 0; fin = 0;
    while (!fin) begin
      logic c2;
      c2 = 0;
      for (int j = 0; j < N_ET; j++) if (live[j] && pos == len[j]) c2 = 1;
      if (c2 || presented >= N_IN) fin = 1;
      else begin
        for (int j = 0; j < N_ET; j++) colm[j] = (pos < len[j]) && (et[j][pos] == ch[presented]);
        if (|(colm & live)) begin live &= colm; pos++; end
        else nz++;
        presented++;
      end
    end
    exp_m = 0; exp_et = -1;
    for (int j = N_ET - 1; j >= 0; j--) if (live[j] && pos == len[j]) begin exp_m = 1; exp_et = j; end
    if (expect_et != -2) chk(exp_et == expect_et, $sformatf("model gives E%0d, expected E%0d", exp_et + 1, expect_et + 1));

    @(negedge clk);
    for (int n = 0; n < N_IN; n++) x[n] = GAMMA'(16 * (ch[n] + NSYM * ($urandom % 3)) + $urandom % 16);
    x_valid = 1;
    @(posedge clk);
    @(negedge clk);
    x_valid = 0;
    cycles = 0;
    while (!u_valid && cycles < 100) begin @(posedge clk); cycles++; #1; end
    chk(cycles == 6 + presented, $sformatf("latency %0d clocks, expected %0d", cycles, 6 + presented));
    for (int n = 0; n < N_IN; n++) chk(terms[n] === SYM_W'(ch[n]), $sformatf("term %0d = %0d, expected %0d", n, terms[n], ch[n]));
    chk(hit === exp_m, $sformatf("hit=%b expected %b", hit, exp_m));
    chk(noise === LEN_W'(nz), $sformatf("noise=%0d expected %0d", noise, nz));
    if (exp_m) begin
      chk(etalon === ET_W'(exp_et) && u === GAMMA'(10 * (exp_et + 1)),
          $sformatf("etalon=%0d u=%0d expected %0d %0d", etalon, u, exp_et, 10 * (exp_et + 1)));
      hits[exp_et]++;
    end else n_nomatch++;
    if (nz > 0) n_noise++;
  endtask

  localparam int A = 0, B = 1, C = 2, D = 3, E = 4;

  initial begin
    et = '{'{A,B,C,D,E}, '{E,A,B,-1,-1}, '{B,A,D,E,-1}};
    len = '{5, 3, 4};
    cfg = '0; x_valid = 0; x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    configure();
    decide('{A,B,C,D,E}, 0);   // E1
    decide('{E,A,B,C,C}, 1);   // E2, complete after three symbols
    decide('{B,A,D,E,A}, 2);   // E3, complete after four symbols
    decide('{B,C,A,D,E}, 2);   // E3 with interference symbol c
    decide('{E,D,A,B,B}, 1);   // E2 with interference symbol d
    decide('{A,B,E,C,D}, -1);  // interference e, then c d: E1 not completed
    decide('{D,D,D,D,D}, -1);  // nothing accepted
    for (int t = 0; t < 200; t++) begin
      int ch [N_IN];
      int e, q;
      e = $urandom % N_ET;
      q = 0;
      for (int n = 0; n < N_IN; n++) begin
        if (q < len[e] && $urandom % 4 != 0) begin ch[n] = et[e][q]; q++; end
        else ch[n] = $urandom % NSYM;
      end
      decide(ch, -2);
    end
    $display("E1 %0d, E2 %0d, E3 %0d, no match %0d, with interference %0d",
             hits[0], hits[1], hits[2], n_nomatch, n_noise);
    chk(hits[0] > 0 && hits[1] > 0 && hits[2] > 0, "every etalon recognised");
    chk(n_nomatch > 0 && n_noise > 0, "no-match and interference occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
