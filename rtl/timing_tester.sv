// timing_tester: the Subject/Examiner experiment that fixed the chain length n.
//
// Eleven dot_mult chains of length N: a Subject S and ten Examiners E_0..E_9.
// A counter p runs 0..9, one step per enabled clock. In the step with
// counter value p:
//   * the output of S is compared with the output of E_p (error on mismatch),
//   * S's input register takes the input E_{p+1} is working on,
//   * E_{p-1}'s input register takes a new question from test_data_gen.
// So S must answer in one clock, while each Examiner keeps its input for ten
// clocks and is checked nine clocks after it got it. In silicon, a chain too
// long for the clock makes S disagree with the Examiners; at RTL level the
// two always agree, and the unit serves as a built-in self-test.
//
// All input registers reset to zero, so the first comparisons (zero
// questions) are consistent. err is sticky; n_checks and n_errors count
// comparisons and mismatches. The error counter and the enable are this
// design's additions; the schedule is the paper's (procedure "testing").
module timing_tester
  import matmul_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned NE = 10,          // number of Examiners (paper: 10)
  parameter int unsigned CW = 32           // counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  output logic          err,
  output logic [CW-1:0] n_checks,
  output logic [CW-1:0] n_errors
);

  typedef struct packed {
    logic [N-1:0][1:0] u;
    logic [N-1:0][1:0] v;
  } question_t;

  localparam int unsigned PW = $clog2(NE);

  logic [PW-1:0] p, p_next, p_prev;
  question_t     e_in [NE];
  question_t     s_in;
  question_t     fresh;
  z4_t           e_out [NE];
  z4_t           s_out;

  test_data_gen #(.N(N)) u_gen (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .u     (fresh.u),
    .v     (fresh.v)
  );

  for (genvar k = 0; k < NE; k++) begin : g_exam
    dot_mult #(.N(N)) u_e (.u(e_in[k].u), .v(e_in[k].v), .s_in(2'b00), .w(e_out[k]));
  end

  dot_mult #(.N(N)) u_s (.u(s_in.u), .v(s_in.v), .s_in(2'b00), .w(s_out));

  always_comb begin
    p_next = (p == PW'(NE - 1)) ? '0 : p + 1'b1;
    p_prev = (p == '0) ? PW'(NE - 1) : p - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p        <= '0;
      s_in     <= '0;
      err      <= 1'b0;
      n_checks <= '0;
      n_errors <= '0;
      for (int k = 0; k < int'(NE); k++) e_in[k] <= '0;
    end else if (en) begin
      n_checks <= n_checks + 1'b1;
      if (s_out != e_out[p]) begin
        err      <= 1'b1;
        n_errors <= n_errors + 1'b1;
      end
      e_in[p_prev] <= fresh;
      s_in         <= e_in[p_next];
      p            <= p_next;
    end
  end

endmodule
