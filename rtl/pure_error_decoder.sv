// pure_error_decoder: the pure error decoder (PED) of the high-level decoder.
//
// For a rotated surface code of odd distance D it turns the D*D-1 syndrome
// bits into a data-qubit error pattern that reproduces that syndrome. The
// ancillas are split into 2*(D+1) chains of (D-1)/2 ancillas: for each ancilla
// type t (0 = X-ancillas, 1 = Z-ancillas), each direction r (-1/+1) and each
// chain c (0..(D-1)/2), step i runs from the centre (i=0) to the boundary.
// Along a chain the data error is a running XOR of the ancilla bits:
//   E(q_0) = E(a_0),   E(q_i) = E(a_i) ^ E(q_{i-1})
// with
//   q_i = ((D-1)/2 + r*(i+1) + 1) * (t*D + (1-t)) - 1 + 2*c*(D*(1-t) - t)
//   a_i = ((D*D-1)/4) * (1+2t) + ((r-1)/2 + r*i) * ((D+1)/2) + c
// Both the recurrence and the index formulas follow the paper. All chains of
// one type are XOR-ed into one D*D vector (they never share a data qubit, the
// XOR is kept as the paper defines the output as the sum of all chains).
// X-ancilla chains mark Z-type errors (pe_z), Z-ancilla chains X-type (pe_x).
//
// Ancilla numbering: X-ancillas 0..(D*D-1)/2-1, then Z-ancillas; data qubits
// are numbered row by row, 0..D*D-1.
// Timing: purely combinational, depth (D-1)/2 XOR gates.
module pure_error_decoder #(
  parameter int D = 5
) (
  input  logic [D*D-2:0] syndrome,
  output logic [D*D-1:0] pe_z,
  output logic [D*D-1:0] pe_x
);
  localparam int STEPS  = (D - 1) / 2;
  localparam int CHAINS = (D + 1) / 2;

  function automatic int q_idx(int t, int r, int c, int i);
    return ((D - 1) / 2 + r * (i + 1) + 1) * (t * D + (1 - t)) - 1
           + 2 * c * (D * (1 - t) - t);
  endfunction

  function automatic int a_idx(int t, int r, int c, int i);
    return ((D * D - 1) / 4) * (1 + 2 * t) + ((r - 1) / 2 + r * i) * CHAINS + c;
  endfunction

  always_comb begin
    logic [1:0][D*D-1:0] acc;
    logic run;
    acc = '0;
    for (int t = 0; t < 2; t++) begin
      for (int rr = 0; rr < 2; rr++) begin
        for (int c = 0; c < CHAINS; c++) begin
          run = 1'b0;
          for (int i = 0; i < STEPS; i++) begin
            run = run ^ syndrome[a_idx(t, 2 * rr - 1, c, i)];
            acc[t][q_idx(t, 2 * rr - 1, c, i)] ^= run;
          end
        end
      end
    end
    pe_z = acc[0];
    pe_x = acc[1];
  end

endmodule
