// hld_top: high-level decoder for one rotated surface-code patch of odd
// distance D.
//
// Each surface-code cycle delivers a syndrome of D*D-1 ancilla bits. It is
// decoded in two parallel parts: the pure error decoder gives a data-qubit
// error pattern that reproduces the syndrome, and the neural network guesses
// which logical error (I, X, Z or Y) separates that pattern from the real
// error. Applying both corrects the patch.
// Interface: with in_valid high the syndrome is captured on a rising clock
// edge; the whole decode is combinational between the input and output
// registers, and the results appear with out_valid one clock later (two
// edges after the syndrome was presented). A new syndrome can be accepted
// every clock. rst_n is synchronous and active low; it clears the valid bit
// and the result registers. Weights and biases (see neural_network) must be
// held stable by the external memory that supplies them.
// The pure error decoder marks a fixed set of
// data qubits, (D-1)(D+1)/2 per error type (12 of 25 at D=5); the other bits
// of pe_x and pe_z are always 0, which synthesis reports as constant outputs.
// They are kept so that both vectors are indexed by data-qubit number.
// The input and output registers are the ones the paper says a decoder needs
// around its combinational network; their timing and the reset are this
// design's choice.
module hld_top
  import hld_pkg::*;
#(
  parameter int D  = 5,
  parameter int L1 = 64,
  parameter int L2 = 64,
  parameter int N  = 4,
  localparam int NA = D * D - 1,
  localparam int NQ = D * D
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [NA-1:0]                syndrome,
  input  logic [L1-1:0][NA-1:0][N-1:0] w1,
  input  logic [L1-1:0][N-1:0]         b1,
  input  logic [L2-1:0][L1-1:0][N-1:0] w2,
  input  logic [L2-1:0][N-1:0]         b2,
  input  logic [1:0][L2-1:0][N-1:0]    w3,
  input  logic [1:0][N-1:0]            b3,
  output logic                         out_valid,
  output logic [NQ-1:0]                pe_x,
  output logic [NQ-1:0]                pe_z,
  output logic                         log_x,
  output logic                         log_z,
  output log_class_e                   log_class
);
  logic [NA-1:0] syn_q;
  logic          vld_q;
  logic [NQ-1:0] ped_x, ped_z;
  logic          nn_x, nn_z;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      syn_q <= '0;
      vld_q <= 1'b0;
    end else begin
      vld_q <= in_valid;
      if (in_valid) syn_q <= syndrome;
    end
  end

  pure_error_decoder #(.D(D)) u_ped (
    .syndrome(syn_q),
    .pe_z    (ped_z),
    .pe_x    (ped_x)
  );

  neural_network #(.D(D), .L1(L1), .L2(L2), .N(N)) u_nn (
    .syndrome(syn_q),
    .w1(w1), .b1(b1),
    .w2(w2), .b2(b2),
    .w3(w3), .b3(b3),
    .log_x(nn_x),
    .log_z(nn_z)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pe_x      <= '0;
      pe_z      <= '0;
      log_x     <= 1'b0;
      log_z     <= 1'b0;
      log_class <= LOG_I;
    end else begin
      out_valid <= vld_q;
      if (vld_q) begin
        pe_x      <= ped_x;
        pe_z      <= ped_z;
        log_x     <= nn_x;
        log_z     <= nn_z;
        log_class <= log_class_e'({nn_z, nn_x});
      end
    end
  end
endmodule
