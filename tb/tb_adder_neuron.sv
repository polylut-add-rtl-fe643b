// tb_adder_neuron -- exhaustive check of adder_neuron against the reference
// sum / batch norm / ReLU quantiser of tb_ref_pkg, for A = 2 with beta = 3
// (256 entries) and A = 3 with beta = 2 (512 entries). It also checks that
// both saturation cases of the quantiser (clip to 0, clip to the maximum)
// or at least the zero clip occur.
module tb_adder_neuron;
  import tb_ref_pkg::*;

  localparam int unsigned SEED = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [7:0] z0;
  logic [2:0] y0;
  logic [8:0] z1;
  logic [1:0] y1;

  adder_neuron #(.BETA(3), .A(2), .SEED(SEED), .LAYER_ID(0), .NEURON_ID(4)) u0 (.z(z0), .y(y0));
  adder_neuron #(.BETA(2), .A(3), .SEED(SEED), .LAYER_ID(1), .NEURON_ID(2)) u1 (.z(z1), .y(y1));

  int checks = 0, failures = 0;

  function automatic int sext(int v, int bits);
    return (v >= (1 << (bits - 1))) ? v - (1 << bits) : v;
  endfunction

  initial begin
    int zv [MAXA];
    int want;
    z0 = '0;
    z1 = '0;
    for (int i = 0; i < MAXA; i++) zv[i] = 0;
    for (int code = 0; code < 512; code++) begin
      z0 = 8'(code);
      z1 = 9'(code);
      @(posedge clk);
      if (code < 256) begin
        for (int a = 0; a < 2; a++) zv[a] = sext((code >> (4 * a)) & 15, 4);
        want = adder_out(SEED, 0, 4, 3, 2, zv);
        checks++;
        if (int'(y0) != want) begin
          failures++;
          $display("FAIL u0 z=%h: got %0d want %0d", code, y0, want);
        end
      end
      for (int a = 0; a < 3; a++) zv[a] = sext((code >> (3 * a)) & 7, 3);
      want = adder_out(SEED, 1, 2, 2, 3, zv);
      checks++;
      if (int'(y1) != want) begin
        failures++;
        $display("FAIL u1 z=%h: got %0d want %0d", code, y1, want);
      end
    end
    checks++;
    if (n_relu_zero == 0) begin
      failures++;
      $display("FAIL the ReLU never clipped a negative value");
    end
    $display("ReLU clips to zero: %0d, to maximum: %0d", n_relu_zero, n_relu_max);
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
