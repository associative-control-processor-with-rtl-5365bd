// pamu_control: control device (CD) of the PAMU.
//
// Runs one "complete coincidence" comparison of a chain of up to CHAIN_MAX
// symbols:
//   IDLE   - wait for start; latch the chain and its length.
//   INIT   - raise nu for one clock (all detectors to 1, distributor to row 1).
//   STEP   - if K2 is present the comparison is complete; if the chain is
//            exhausted it ends without a match; otherwise present the next
//            symbol with strobe K for one clock. A step in which the PAMU
//            shows no K1 is counted as interference (noise_cnt) and the
//            symbol is dropped.
//   FINISH - raise d (read request), capture K2, the lowest-numbered etalon
//            whose end gate fired and the detector outputs; pulse done.
// The paper names the CD and the signals it exchanges with the PAMU (nu, K
// from it, K1, K2 to it, d at the end of the input); this sequence and the
// tie rule for several completed etalons are this design's own.
//
// With CORRECTION = 0 (PAMU without end gates) the whole chain is always
// presented and the result is the lowest-numbered detector still at 1 when d
// is raised.
//
// Timing: start -> done takes 1 (INIT) + one clock per symbol presented + 1
// (the STEP that sees K2 or the end of the chain) + 1 (FINISH) clocks;
// results are registered and valid with done.
module pamu_control #(
  parameter int unsigned CHAIN_MAX = 5,
  parameter int unsigned NSYM      = 5,
  parameter int unsigned N_ET      = 3,
  parameter int unsigned SYM_W     = (NSYM > 1) ? $clog2(NSYM) : 1,
  parameter int unsigned LEN_W     = $clog2(CHAIN_MAX + 1),
  parameter int unsigned ET_W      = (N_ET > 1) ? $clog2(N_ET) : 1,
  parameter bit          CORRECTION = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CHAIN_MAX-1:0][SYM_W-1:0] chain,
  input  logic [LEN_W-1:0]            chain_len,
  // PAMU side
  output logic                        nu,
  output logic                        k,
  output logic                        sym_valid,
  output logic [SYM_W-1:0]            sym,
  output logic                        d,
  input  logic                        k1,
  input  logic                        k2,
  input  logic [N_ET-1:0]             end_hit,
  input  logic [N_ET-1:0]             s,
  // result
  output logic                        busy,
  output logic                        done,
  output logic                        matched,
  output logic [ET_W-1:0]             etalon,
  output logic [N_ET-1:0]             s_out,
  output logic [LEN_W-1:0]            noise_cnt
);

  typedef enum logic [1:0] {IDLE, INIT, STEP, FINISH} state_e;

  state_e                          state;
  logic [CHAIN_MAX-1:0][SYM_W-1:0] chain_q;
  logic [LEN_W-1:0]                len_q;
  logic [LEN_W-1:0]                pos;
  logic                            present;
  logic [ET_W-1:0]                 first_hit;

  assign present   = (state == STEP) && !k2 && (pos < len_q);
  assign nu        = (state == INIT);
  assign k         = present;
  assign sym_valid = present;
  assign sym       = chain_q[pos < LEN_W'(CHAIN_MAX) ? pos : '0];
  assign d         = (state == FINISH);
  assign busy      = (state != IDLE);

  // Handshake rules towards the PAMU: K only with a symbol, never together
  // with the initial setting or the read request.
  a_k_with_symbol: assert property (@(posedge clk) disable iff (!rst_n)
                                    k |-> (sym_valid && !nu && !d));
  a_done_pulse:    assert property (@(posedge clk) disable iff (!rst_n)
                                    done |=> !done);

  always_comb begin
    first_hit = '0;
    for (int j = N_ET - 1; j >= 0; j--)
      if (CORRECTION ? end_hit[j] : s[j]) first_hit = ET_W'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      chain_q   <= '0;
      len_q     <= '0;
      pos       <= '0;
      done      <= 1'b0;
      matched   <= 1'b0;
      etalon    <= '0;
      s_out     <= '0;
      noise_cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          chain_q   <= chain;
          len_q     <= (chain_len > LEN_W'(CHAIN_MAX)) ? LEN_W'(CHAIN_MAX) : chain_len;
          pos       <= '0;
          noise_cnt <= '0;
          state     <= INIT;
        end
        INIT: state <= STEP;
        STEP: begin
          if (present) begin
            pos <= pos + 1'b1;
            if (!k1) noise_cnt <= noise_cnt + 1'b1;
          end else begin
            state <= FINISH;
          end
        end
        FINISH: begin
          matched <= CORRECTION ? k2 : |s;
          etalon  <= first_hit;
          s_out   <= s;
          done    <= 1'b1;
          state   <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
