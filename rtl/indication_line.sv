// indication_line: line of indication (LI) with the gates B2 and B3.
//
// One indicator (coincidence detector) per etalon column. Each step:
//   * B2[j] = col[j] & ie[j]: the column matched and its detector is still 1;
//   * K1    = OR of all B2: at least one live etalon accepts the symbol;
//   * B3    = K & K1: the step strobe reaches the detectors only with K1.
// On B3 every detector keeps its 1 if its column signal is present and falls
// to 0 otherwise. Without K1 (a symbol no live etalon accepts, i.e. noise)
// nothing is updated, so the detectors can never all be cleared by noise.
// nu (the paper's initial setting) sets every detector to 1.
// The gate functions follow the paper's description of the PAMU with
// correction; they are combinational, the detectors update on the clock.
// With CORRECTION = 0 the line is the paper's simpler scheme without the
// gates B3: K reaches the detectors directly, so a symbol that no etalon
// accepts clears them all (k1 is still output for observation).
//
// Interface: nu, k, col, d -> ie, s (S_j = detector & d), k1, b3.
module indication_line #(
  parameter int unsigned N_ET       = 3,
  parameter bit          CORRECTION = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            nu,
  input  logic            k,
  input  logic [N_ET-1:0] col,
  input  logic            d,
  output logic [N_ET-1:0] ie,
  output logic [N_ET-1:0] s,
  output logic            k1,
  output logic            b3
);

  logic [N_ET-1:0] b2;

  assign b2 = col & ie;
  assign k1 = |b2;
  assign b3 = CORRECTION ? (k & k1) : k;

  // Without K1 no detector may change, so they can never all drop at once.
  if (CORRECTION) begin : g_corr_check
    a_no_clear_all: assert property (@(posedge clk) disable iff (!rst_n)
                                     (!nu && ie != '0) |=> ie != '0);
  end

  for (genvar j = 0; j < N_ET; j++) begin : g_ie
    indicator u_ie (
      .clk (clk),
      .rst_n(rst_n),
      .c   (nu),
      .b   (b3),
      .l   (col[j]),
      .d   (d),
      .s   (s[j]),
      .t   (ie[j])
    );
  end

endmodule
