// tb_poly_sub_neuron -- exhaustive check of poly_sub_neuron against the
// reference polynomial of tb_ref_pkg, for two configurations:
//   u0: beta 3 -> 3(+1), F = 2, D = 3 (a JSC-M Lite-Add2 sub-neuron)
//   u1: beta 2 -> 2(+1), F = 3, D = 1 (a linear, LogicNets-like sub-neuron)
// Every input combination of each is applied and the signed output compared.
module tb_poly_sub_neuron;
  import tb_ref_pkg::*;

  localparam int unsigned SEED = 7;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        [5:0] x0;
  logic signed [3:0] z0;
  logic        [5:0] x1;
  logic signed [2:0] z1;

  poly_sub_neuron #(.BETA_IN(3), .BETA_OUT(3), .F(2), .D(3), .SEED(SEED),
                    .LAYER_ID(1), .NEURON_ID(5), .SUB_ID(1)) u0 (.x(x0), .z(z0));
  poly_sub_neuron #(.BETA_IN(2), .BETA_OUT(2), .F(3), .D(1), .SEED(SEED),
                    .LAYER_ID(2), .NEURON_ID(9), .SUB_ID(0)) u1 (.x(x1), .z(z1));

  int checks = 0, failures = 0;
  bit seen [16];
  int n_distinct = 0;

  initial begin
    int xv [MAXF];
    int want;
    x0 = '0;
    x1 = '0;
    for (int i = 0; i < 16; i++) seen[i] = 1'b0;
    for (int i = 0; i < MAXF; i++) xv[i] = 0;
    for (int code = 0; code < 64; code++) begin
      x0 = 6'(code);
      x1 = 6'(code);
      @(posedge clk);
      for (int k = 0; k < 2; k++) xv[k] = (code >> (3 * k)) & 7;
      want = sub_out(SEED, 1, 5, 1, 3, 3, 2, 3, xv);
      checks++;
      if (int'(z0) != want) begin
        failures++;
        $display("FAIL u0 x=%0d: got %0d want %0d", code, z0, want);
      end
      seen[want & 15] = 1'b1;
      for (int k = 0; k < 3; k++) xv[k] = (code >> (2 * k)) & 3;
      want = sub_out(SEED, 2, 9, 0, 2, 2, 3, 1, xv);
      checks++;
      if (int'(z1) != want) begin
        failures++;
        $display("FAIL u1 x=%0d: got %0d want %0d", code, z1, want);
      end
    end
    // the quantised table must not collapse to a few values
    for (int i = 0; i < 16; i++) n_distinct += int'(seen[i]);
    checks++;
    if (n_distinct < 3) begin
      failures++;
      $display("FAIL u0 produces only %0d distinct values", n_distinct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
