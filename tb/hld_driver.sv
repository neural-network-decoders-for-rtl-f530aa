// hld_driver: stimulus and checking for an hld_top instance, shared by the
// reduced-size and the full-size end-to-end testbenches.
//
// It resets the decoder, loads a random weight set (drawn anew several
// times, always with the pipeline drained), streams syndromes with random
// gaps in in_valid, and for every result checks:
//  - latency: the result of a syndrome captured on clock edge e is valid
//    right after edge e+1;
//  - the pure error reproduces the syndrome (rebuilt from the code geometry);
//  - log_x/log_z equal the reference network, log_class equals {log_z,log_x};
//  - nothing is output without a syndrome, and reset clears out_valid.
// It counts the mechanisms of the design and fails when one never happened:
// SQNL saturation at +1 and at -1, the curved SQNL region, each logical
// class I/X/Z/Y, a PED chain that marks more data qubits than it has
// syndrome bits set (the running XOR carrying along a chain; only possible
// for D > 3, where chains are longer than one step), a bubble in
// in_valid, back-to-back decodes, and a reset while results are in flight.
module hld_driver #(
  parameter int D     = 3,
  parameter int L1    = 8,
  parameter int L2    = 4,
  parameter int N     = 3,
  parameter int TESTS = 200,
  localparam int NA   = D * D - 1,
  localparam int NQ   = D * D
) (
  input  logic                         clk,
  output logic                         rst_n,
  output logic                         in_valid,
  output logic [NA-1:0]                syndrome,
  output logic [L1-1:0][NA-1:0][N-1:0] w1,
  output logic [L1-1:0][N-1:0]         b1,
  output logic [L2-1:0][L1-1:0][N-1:0] w2,
  output logic [L2-1:0][N-1:0]         b2,
  output logic [1:0][L2-1:0][N-1:0]    w3,
  output logic [1:0][N-1:0]            b3,
  input  logic                         out_valid,
  input  logic [NQ-1:0]                pe_x,
  input  logic [NQ-1:0]                pe_z,
  input  logic                         log_x,
  input  logic                         log_z,
  input  logic [1:0]                   log_class,
  output logic                         done,
  output int                           checks,
  output int                           failures
);
  import hld_ref_pkg::*;

  int rw1[], rb1[], rw2[], rb2[], rw3[], rb3[];
  sqnl_stats_t st;
  int n_class [4];
  int n_chain, n_bubble, n_b2b, n_rst;
  int edge_no;

  typedef struct {
    logic [NA-1:0] syn;
    logic [1:0]    exp_nn;
    int            out_edge;
  } exp_t;
  exp_t q[$];

  function automatic int rnd(int n);
    return sx(int'($urandom), n);
  endfunction

  task automatic load_weights();
    rw1 = new[L1*NA]; rb1 = new[L1]; rw2 = new[L2*L1]; rb2 = new[L2];
    rw3 = new[2*L2]; rb3 = new[2];
    for (int k = 0; k < L1*NA; k++) begin rw1[k] = rnd(N); w1[k/NA][k%NA] = N'(rw1[k]); end
    for (int k = 0; k < L1; k++)    begin rb1[k] = rnd(N); b1[k] = N'(rb1[k]); end
    for (int k = 0; k < L2*L1; k++) begin rw2[k] = rnd(N); w2[k/L1][k%L1] = N'(rw2[k]); end
    for (int k = 0; k < L2; k++)    begin rb2[k] = rnd(N); b2[k] = N'(rb2[k]); end
    for (int k = 0; k < 2*L2; k++)  begin rw3[k] = rnd(N); w3[k/L2][k%L2] = N'(rw3[k]); end
    for (int k = 0; k < 2; k++)     begin rb3[k] = rnd(N); b3[k] = N'(rb3[k]); end
  endtask

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s (edge %0d)", msg, edge_no);
  endtask

  always @(posedge clk) edge_no++;

  // Output monitor: sampled between edges.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      logic [MAXQ-2:0] s;
      checks++;
      if (q.size() == 0) fail("result without a syndrome");
      else begin
        e = q.pop_front();
        if (e.out_edge != edge_no) fail($sformatf("latency: expected edge %0d", e.out_edge));
        s = syndrome_of(D, MAXQ'(pe_z), MAXQ'(pe_x));
        checks++;
        if (s[NA-1:0] !== e.syn || s[MAXQ-2:NA] != '0) fail("pure error does not reproduce the syndrome");
        checks++;
        if ({log_z, log_x} !== e.exp_nn) fail($sformatf("logical flags %b expected %b", {log_z, log_x}, e.exp_nn));
        checks++;
        if (log_class !== {log_z, log_x}) fail("log_class does not match the flags");
        n_class[{log_z, log_x}]++;
        if ($countones(pe_x) + $countones(pe_z) > $countones(e.syn)) n_chain++;
      end
    end
  end

  task automatic drain();
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (q.size() != 0) fail("results missing after drain");
    q.delete();
  endtask

  initial begin
    int issued;
    logic prev_valid;
    done = 0; checks = 0; failures = 0; edge_no = 0;
    n_class = '{0, 0, 0, 0};
    n_chain = 0; n_bubble = 0; n_b2b = 0; n_rst = 0;
    st = '{0, 0, 0};
    rst_n = 1'b0; in_valid = 1'b0; syndrome = '0;
    load_weights();
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0 || log_class !== 2'b00) fail("reset state");
    rst_n = 1'b1;
    issued = 0;
    prev_valid = 1'b0;
    while (issued < TESTS) begin
      // new weight set every 40 decodes, with the pipeline empty
      if (issued % 40 == 0 && issued != 0) begin
        drain();
        load_weights();
        prev_valid = 1'b0;
      end
      // one reset while two results are in flight
      if (issued == TESTS / 2 && n_rst == 0) begin
        in_valid = 1'b1;
        for (int i = 0; i < NA; i++) syndrome[i] = $urandom % 2;
        @(negedge clk);
        rst_n = 1'b0;
        in_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (out_valid !== 1'b0) fail("reset did not clear out_valid");
        rst_n = 1'b1;
        q.delete();
        n_rst++;
        @(negedge clk);
        checks++;
        if (out_valid !== 1'b0) fail("result after reset");
        prev_valid = 1'b0;
      end
      if (($urandom % 5) == 0) begin
        in_valid = 1'b0;
        syndrome = NA'({$urandom, $urandom, $urandom});  // ignored
        n_bubble++;
        prev_valid = 1'b0;
      end else begin
        exp_t e;
        in_valid = 1'b1;
        for (int i = 0; i < NA; i++) syndrome[i] = (($urandom % 8) < (issued % 6));
        e.syn = syndrome;
        e.exp_nn = nn_ref(D, L1, L2, N, (MAXQ-1)'(syndrome), rw1, rb1, rw2, rb2, rw3, rb3, st);
        e.out_edge = edge_no + 2;
        q.push_back(e);
        if (prev_valid) n_b2b++;
        prev_valid = 1'b1;
        issued++;
      end
      @(negedge clk);
    end
    drain();
    $display("hld D=%0d L1=%0d L2=%0d N=%0d: sqnl sat+ %0d sat- %0d curved %0d | class I %0d X %0d Z %0d Y %0d | chains %0d bubbles %0d back-to-back %0d resets %0d",
             D, L1, L2, N, st[0], st[1], st[2], n_class[0], n_class[1], n_class[2], n_class[3],
             n_chain, n_bubble, n_b2b, n_rst);
    checks++;
    if (st[0] == 0 || st[1] == 0 || st[2] == 0) fail("an SQNL region never happened");
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (n_class[c] == 0) fail($sformatf("logical class %0d never produced", c));
    end
    checks++;
    if ((D > 3 && n_chain == 0) || n_bubble == 0 || n_b2b == 0 || n_rst == 0) fail("a pipeline or chain mechanism never happened");
    done = 1;
  end
endmodule
