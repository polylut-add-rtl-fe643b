// tb_polylut_add_neuron -- checks one PolyLUT-Add neuron (beta 3, F 2, A 2,
// D 3) under both pipeline strategies at once. A new random input vector is
// applied every cycle; the output of the strategy-2 instance must equal the
// reference neuron of that input one cycle later, that of the strategy-1
// instance two cycles later.
module tb_polylut_add_neuron;
  import tb_ref_pkg::*;

  localparam int unsigned SEED = 11, LAYER = 1, NEURON = 1;
  localparam int unsigned BI = 3, BO = 3, FI = 2, AA = 2, DD = 3;
  localparam int NCYC = 300;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [AA*FI*BI-1:0] x;
  logic [BO-1:0]       y_comb, y_sep;

  polylut_add_neuron #(.BETA_IN(BI), .BETA_OUT(BO), .F(FI), .A(AA), .D(DD), .PIPE_STRATEGY(2),
                       .SEED(SEED), .LAYER_ID(LAYER), .NEURON_ID(NEURON))
    u_comb (.clk(clk), .x(x), .y(y_comb));
  polylut_add_neuron #(.BETA_IN(BI), .BETA_OUT(BO), .F(FI), .A(AA), .D(DD), .PIPE_STRATEGY(1),
                       .SEED(SEED), .LAYER_ID(LAYER), .NEURON_ID(NEURON))
    u_sep (.clk(clk), .x(x), .y(y_sep));

  int checks = 0, failures = 0;
  int expect_hist [NCYC];
  bit seen [8];
  int n_distinct = 0;

  // reference: the neuron evaluated directly from its parameters
  function automatic int ref_neuron(logic [AA*FI*BI-1:0] xv);
    int xs [MAXF];
    int zs [MAXA];
    for (int i = 0; i < MAXF; i++) xs[i] = 0;
    for (int i = 0; i < MAXA; i++) zs[i] = 0;
    for (int a = 0; a < int'(AA); a++) begin
      for (int k = 0; k < int'(FI); k++) xs[k] = int'(xv[(a*FI + k)*BI +: BI]);
      zs[a] = sub_out(SEED, LAYER, NEURON, a, BI, BO, FI, DD, xs);
    end
    return adder_out(SEED, LAYER, NEURON, BO, AA, zs);
  endfunction

  initial begin
    x = '0;
    for (int i = 0; i < 8; i++) seen[i] = 1'b0;
    for (int t = 0; t < NCYC; t++) begin
      x = (AA*FI*BI)'($urandom);
      expect_hist[t] = ref_neuron(x);
      seen[expect_hist[t] & 7] = 1'b1;
      @(posedge clk);
      #1;
      // y_comb now holds the result of cycle t, y_sep that of cycle t-1
      checks++;
      if (int'(y_comb) != expect_hist[t]) begin
        failures++;
        $display("FAIL strategy 2 cycle %0d: got %0d want %0d", t, y_comb, expect_hist[t]);
      end
      if (t >= 1) begin
        checks++;
        if (int'(y_sep) != expect_hist[t-1]) begin
          failures++;
          $display("FAIL strategy 1 cycle %0d: got %0d want %0d", t, y_sep, expect_hist[t-1]);
        end
      end
    end
    // the stimulus must make the output move, or latency errors go unseen
    for (int i = 0; i < 8; i++) n_distinct += int'(seen[i]);
    $display("distinct output values: %0d", n_distinct);
    checks++;
    if (n_distinct < 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
