// tb_polylut_add_layer -- checks a 16-input, 10-neuron PolyLUT-Add layer
// (beta 3, F 2, A 2, D 3) under both pipeline strategies. Random samples are
// offered with random gaps in in_valid. For each instance the testbench
// checks that out_valid rises exactly LATENCY cycles (1 or 2) after
// in_valid and that every output word equals the reference layer, which
// gathers each sub-neuron's inputs through the same sparse connectivity and
// evaluates the neuron arithmetic directly.
module tb_polylut_add_layer;
  import tb_ref_pkg::*;

  localparam int unsigned SEED = 5, LAYER = 2;
  localparam int unsigned NI = 16, NO = 10, BI = 3, BO = 3, FI = 2, AA = 2, DD = 3;
  localparam int NCYC = 300;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                rst_n;
  logic                in_valid;
  logic [NI*BI-1:0]    x;
  logic                v_comb, v_sep;
  logic [NO*BO-1:0]    y_comb, y_sep;

  polylut_add_layer #(.N_IN(NI), .N_OUT(NO), .BETA_IN(BI), .BETA_OUT(BO), .F(FI), .A(AA),
                      .D(DD), .PIPE_STRATEGY(2), .SEED(SEED), .LAYER_ID(LAYER))
    u_comb (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(v_comb), .y(y_comb));
  polylut_add_layer #(.N_IN(NI), .N_OUT(NO), .BETA_IN(BI), .BETA_OUT(BO), .F(FI), .A(AA),
                      .D(DD), .PIPE_STRATEGY(1), .SEED(SEED), .LAYER_ID(LAYER))
    u_sep (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(v_sep), .y(y_sep));

  int checks = 0, failures = 0;
  bit              vhist [NCYC];
  logic [NO*BO-1:0] yhist [NCYC];
  int n_valid = 0, n_bubble = 0;

  function automatic logic [NO*BO-1:0] ref_layer(logic [NI*BI-1:0] xv);
    vec_t ai, ao;
    logic [NO*BO-1:0] r;
    for (int i = 0; i < MAXN; i++) begin
      ai[i] = 0;
      ao[i] = 0;
    end
    for (int i = 0; i < int'(NI); i++) ai[i] = int'(xv[i*BI +: BI]);
    layer_out(SEED, LAYER, NI, NO, BI, BO, FI, AA, DD, ai, ao);
    for (int n = 0; n < int'(NO); n++) r[n*BO +: BO] = BO'(ao[n]);
    return r;
  endfunction

  task automatic check_out(string tag, int t, int lat, logic v, logic [NO*BO-1:0] y);
    bit want_v;
    want_v = (t >= lat) ? vhist[t-lat] : 1'b0;
    checks++;
    if (v !== want_v) begin
      failures++;
      $display("FAIL %s cycle %0d: out_valid %0b want %0b", tag, t, v, want_v);
    end
    if (want_v) begin
      checks++;
      if (y !== yhist[t-lat]) begin
        failures++;
        $display("FAIL %s cycle %0d: y %h want %h", tag, t, y, yhist[t-lat]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      in_valid = (t < NCYC - 4) && ($urandom_range(0, 3) != 0);
      x = (NI*BI)'({$urandom, $urandom});
      vhist[t] = in_valid;
      yhist[t] = ref_layer(x);
      if (in_valid) n_valid++;
      else n_bubble++;
      @(posedge clk);
      #1;
      check_out("strategy 2", t + 1, 1, v_comb, y_comb);
      check_out("strategy 1", t + 1, 2, v_sep, y_sep);
    end
    $display("samples %0d, bubbles %0d", n_valid, n_bubble);
    checks++;
    if (n_valid == 0 || n_bubble == 0) failures++;
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
