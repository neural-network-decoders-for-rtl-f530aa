# A neural-network high-level decoder for small rotated surface codes

A surface-code logical qubit has to be decoded every error-correction cycle.
The decoder receives the syndrome, which is the D*D-1 ancilla measurement bits
of a distance-D rotated surface code. It must say which correction to apply to
the D*D data qubits, within a fraction of the cycle. For transmons the cycle
is about 440 ns.

This RTL splits the decoding into two parts that run side by side.

1. **Pure error decoder (PED).** This is a fixed network of XOR gates. It
   builds *some* data-qubit error pattern that produces exactly the measured
   syndrome. That pattern may differ from the real error by a logical
   operator.
2. **Neural network (NN).** This is a small, fully connected, feed-forward
   classifier. It reads the same syndrome and guesses which logical error
   (I, X, Z or Y) separates the PED's pattern from the real error.

Apply the PED pattern and then the NN's logical correction. Together they fix
the patch up to stabilizers, which do not matter. The network only has to
classify, and classification is what small networks do well. The hard part,
producing a pattern with the right syndrome, is left to trivial logic.

The whole decoder is one combinational cone between an input register and an
output register. It takes one syndrome per clock, and results are valid on the
clock after the syndrome is captured. Nothing is iterative, so the decode time
is constant.

The default parameters build a distance-5 decoder with 64 + 64 hidden nodes and
4-bit arithmetic, the largest of the design points evaluated for hardware. All
sizes are parameters.

## Numbering conventions

- **Data qubits** are numbered row by row: qubit `r*D + c` is in row `r` and
  column `c`.
- **X-ancillas** come first, numbered `0 .. (D*D-1)/2 - 1`. They sit in the
  D-1 gaps between data columns, `(D+1)/2` per gap, numbered top to bottom
  within a gap.
  - X-ancilla `k*(D+1)/2 + j` sits between columns `k` and `k+1`.
  - It checks rows `2j-1, 2j` when `k` is even, and rows `2j, 2j+1` when `k`
    is odd. Rows outside the patch are dropped, so boundary ancillas check
    two qubits.
- **Z-ancillas** follow, numbered `(D*D-1)/2 .. D*D-2`.
  - Z-ancilla `(D*D-1)/2 + k*(D+1)/2 + j` sits between rows `k` and `k+1`,
    numbered right to left within a gap.
  - It checks columns `D-1-2j, D-2j` when `k` is even, and columns
    `D-2-2j, D-1-2j` when `k` is odd.
- X-ancillas detect Z errors; Z-ancillas detect X errors.

The syndrome bit of an ancilla is 1 when its measurement changed, meaning an
error was detected. All vectors are little-endian: bit `i` is qubit or ancilla
`i`.

## The pure error decoder (`pure_error_decoder`)

The PED routes every ancilla to the boundary of its own type along a fixed
chain. The chain layout is symmetric under 90-degree rotation and under
translation:

- There are `2*(D+1)` chains, each `(D-1)/2` ancillas long.
- For each type `t` (0 = X, 1 = Z) there are two directions `r = -1, +1`
  (left/right for X, up/down for Z).
- In each direction there are `(D+1)/2` parallel chains, `c = 0 .. (D-1)/2`.

Step `i` of a chain runs from the centre (`i = 0`) towards the edge. It pairs
ancilla `a_i` with data qubit `q_i`:

```
q_i = ((D-1)/2 + r*(i+1) + 1) * (t*D + (1-t)) - 1 + 2*c*(D*(1-t) - t)
a_i = ((D*D-1)/4) * (1 + 2t) + ((r-1)/2 + r*i) * ((D+1)/2) + c
E(q_0) = S(a_0)
E(q_i) = S(a_i) XOR E(q_{i-1})
```

So the error bit marked on a data qubit is the running XOR of the syndrome
from the centre out to that step.

Example at D = 5. If only X-ancilla 8 fires, the chain is `t=0, r=+1, c=2`,
with `a_i = 8 + 3i` and `q_i = 23 + i`. It marks data qubits 23 and 24 with a Z
error, which connects ancilla 8 to the right boundary.

Chains of one type never share a data qubit, so the final OR/XOR of the chains
is trivial. X chains produce `pe_z` (Z-type errors) and Z chains produce
`pe_x`. Only `(D-1)(D+1)/2` qubits per type are ever marked. The other bits are
constant 0.

The logic depth is `(D-1)/2` XOR gates: 2 at D=5 and 4 at D=9.

## The neural network (`neural_network`)

The network has a fixed shape:

- an input of `D*D-1` one-bit syndrome values;
- a first hidden layer of `L1` nodes;
- a second hidden layer of `L2` nodes;
- two output nodes.

Output 0 flags a logical X error and output 1 a logical Z error. Both flags
together mean Y. `hld_pkg::log_class_e` encodes `{log_z, log_x}` as
`LOG_I, LOG_X, LOG_Z, LOG_Y`.

Every node computes

```
y_j = f( b_j + sum_i W_ji * y_i )
```

The transfer function `f` is **SQNL**, a cheap tanh substitute:

```
SQNL(x) = -1           for x < -1
        = 2x + x^2     for -1 <= x < 0
        = 2x - x^2     for 0 <= x <= 1
        = 1            for x > 1
```

### Number format

Weights, biases and hidden outputs share one format: N-bit two's complement
with N-1 fraction bits (Q0.(N-1)). The range is `[-1, 1 - 2^-(N-1)]`, so at
N=4 the step is 1/8. A weight code is therefore `round(weight * 2^(N-1))`.

Hidden outputs fill that full range. SQNL(+1) saturates to the largest code.

### Node hardware (`nn_accum`, `nn_node`)

The figure to keep in mind is one node as a three-stage pipeline without
registers.

1. **Products.**
   - Layer 2 and the output layer: each of the M products of an N-bit input
     and an N-bit weight is laid out as N partial-product rows in the
     *modified Baugh-Wooley* form (`bw_multiplicands`). The bits of the sign
     row and the sign column are inverted, so every row is non-negative and
     needs no sign extension. Each product is then off by the constant
     `2^N - 2^(2N-1)`.
   - Layer 1: the inputs are single unsigned bits, so a product is the weight
     AND-ed with the bit. One sign-extended row per input.
2. **One extra row.** It carries the bias and all M Baugh-Wooley correction
   constants. In layers 2 and 3 the bias is shifted left by N-1 to line up
   with the 2(N-1) fraction bits of the products.
3. **Carry-save tree** (`csa_tree`). A Wallace tree of word-level 3:2
   compressors reduces the `M*N+1` rows (or `M+1` rows in layer 1) to two
   words. A final adder then produces the sum.
   - Sum width: `2N + ceil(log2 M)` bits with `2(N-1)` fraction bits.
   - Sum width in layer 1: `N + ceil(log2 M) + 1` bits with `N-1` fraction
     bits.
   - At the default sizes the sums are 14 bits (layers 2 and 3) and 10 bits
     (layer 1).
   - The width always holds the worst case `|sum| <= M + 1`, so nothing
     overflows. The tree works modulo `2^W`, so the result is exact.
4. **SQNL** (`sqnl_unit`).
   - If the sum lies outside `[-1, 1)`, the output saturates to -1 or to the
     largest code.
   - Otherwise the sum is exactly its sign bit plus its fraction bits. That
     value `x` is squared. The square is added to `2x` when `x` is negative
     and subtracted when it is not.
   - The result is truncated to N bits by dropping low bits, which rounds
     towards minus infinity.

Output nodes skip SQNL. Only the sign of their sum is used, and a flag is 1
when the sum is `>= 0`.

### Weights

The network has no weight storage. Every weight and bias is an input port and
must be held stable by an external memory. The arrays are packed:

| port | shape | meaning |
|------|-------|---------|
| `w1` | `[L1][D*D-1][N]` | `w1[j][i]`: syndrome bit i to layer-1 node j |
| `b1` | `[L1][N]` | layer-1 biases |
| `w2` | `[L2][L1][N]` | `w2[j][i]`: layer-1 node i to layer-2 node j |
| `b2` | `[L2][N]` | layer-2 biases |
| `w3` | `[2][L2][N]` | `w3[o][i]`: layer-2 node i to output o (0 = X, 1 = Z) |
| `b3` | `[2][N]` | output biases |

At the defaults this is 5760 weights plus 130 biases, 23,560 bits in all.

The network is meant to be trained with its four-fold rotational symmetry:
only a quarter of the weights are independent, and rotated copies fill the
rest. That copying belongs to whatever fills the weight memory; the datapath
takes a full weight set.

No trained weights are included. The testbenches use random weights and check
the arithmetic against a reference model, not the decoding accuracy.

## Top level (`hld_top`)

```
syndrome --[in reg]--+--> pure_error_decoder --> pe_x, pe_z --[out reg]-->
                     |
                     +--> neural_network ------> log_x, log_z, log_class --[out reg]-->
```

- `in_valid` high: the syndrome is captured on the rising edge.
- `out_valid` rises after the next edge, so the latency is two edges. A new
  syndrome is accepted on every clock.
- `rst_n` is synchronous and active low. It clears the valid bits and the
  result registers.

Clock period: the cone is three node delays deep plus a few XOR levels for the
PED. The period has to cover one full decode, since nothing inside is
pipelined. Adding pipeline registers between layers would be a local change in
`neural_network`.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `D` | 5 | code distance, odd, 3 or more |
| `L1` | 64 | nodes in hidden layer 1 |
| `L2` | 64 | nodes in hidden layer 2 |
| `N` | 4 | bits of weights, biases and hidden outputs (2 or more) |

Other configurations from the same study that this RTL can be set to:

- D=3, 8/4 nodes, 3 bits;
- D=3, 16/4 nodes, 5 bits;
- the largest networks, with 256/64 nodes and 8 to 9 bits, at D = 3, 5, 7
  and 9.

The d=5 64/64 4-bit default is reported to need about 0.39 mm² in a 40 nm
process and about 14 ns, excluding the weight memory and interconnect.

## Where this departs from, or adds to, the reference description

These are choices the description left open:

- Rounding of SQNL is truncation (towards minus infinity). The bias is aligned
  to the product binary point. The output sign polarity is "sum >= 0 means
  error".
- All Baugh-Wooley correction constants are folded into the bias row.
- The carry-save tree works on whole words and ends in a plain adder.
- The input and output registers, the valid handshake and the reset are this
  design's own.
- The node figure labels the partial products "m² × n". The RTL follows the
  text instead: one Baugh-Wooley array per input, giving M*N rows.
- Not included:
  - the weight memory;
  - the loader that expands rotation-shared weights;
  - any training;
  - the physical Pauli-frame or correction logic that would consume the
    outputs.

## Files

`rtl/`:

| file | content |
|------|---------|
| `hld_pkg.sv` | logical-class enum, sum width and fraction-bit functions |
| `pure_error_decoder.sv` | PED |
| `bw_multiplicands.sv` | Baugh-Wooley partial-product rows |
| `csa_tree.sv` | Wallace carry-save tree and final adder |
| `sqnl_unit.sv` | SQNL with squaring unit and saturation |
| `nn_accum.sv` | node weighted sum: products, bias row, tree |
| `nn_node.sv` | hidden node: `nn_accum` + `sqnl_unit` |
| `nn_layer.sv` | K parallel hidden nodes |
| `neural_network.sv` | two hidden layers and two sign-only output nodes |
| `hld_top.sv` | registers, PED and NN |

`tb/`: each `tb_<module>.sv` tests the module of the same name. `hld_ref_pkg`
holds the reference models:

- SQNL evaluated in floating point;
- node sums by integer multiplication;
- a reference network;
- a syndrome generator from the code geometry.

`nn_check`, `node_check` and `hld_driver` are stimulus helpers.

## Verification

Every testbench checks itself and ends with
`TB_RESULT checks=<n> failures=<n>`.

- **`tb_pure_error_decoder`**: D = 3, 5, 7 and 9. Every single-ancilla
  syndrome and 2000 random syndromes. It rebuilds the syndrome of the PED
  output from the geometry above and requires a match. This check does not
  depend on the chain formulas. It also checks the worked example.
- **`tb_bw_multiplicands`**: all operand pairs at N = 3, 4, 5.
- **`tb_csa_tree`**: random and all-ones operands at 3, 25 and 257 operands.
- **`tb_sqnl_unit`**: every input value for the two default sum formats, plus
  random values at 9-bit output.
- **`tb_nn_accum`, `tb_nn_node`**: layer-1 (24 one-bit inputs) and full-size
  layer-2 (64 inputs, 4 bits) nodes, plus 16-input nodes at 5 and 9 bits. All
  three SQNL regions must be reached.
- **`tb_nn_layer`**: one layer-1 and one layer-2 layer at reduced size, node
  by node.
- **`tb_neural_network`**: D=3 8/4/3-bit, D=3 16/4/5-bit and D=5 16/8/4-bit
  networks against the reference network. All four logical classes must
  appear.
- **`tb_hld_top`**: end to end at D=5, 16/8 nodes, 4 bits. It streams 400
  syndromes with random gaps, reloads the weights, and resets while results
  are in flight. It checks the latency, that the PED output reproduces the
  syndrome, the NN flags and the class encoding. It requires each of these to
  happen at least once: SQNL saturation in both directions, the curved SQNL
  region, all four classes, a chain carry in the PED, a bubble, a
  back-to-back decode and the reset.

**Not simulated: the full default size (64/64 hidden nodes).** At that size
Verilator's generated C++ is hundreds of megabytes and did not finish
compiling in a reasonable time. The largest end-to-end run is the D=5 16/8
configuration above. A full-size 64-input node is simulated on its own. The
default top does lint and elaborate cleanly; its synthesis runs but takes
several minutes.

Running a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/hld_pkg.sv tb/hld_ref_pkg.sv tb/tb_hld_top.sv --top tb_hld_top
./obj_dir/Vtb_hld_top
```
