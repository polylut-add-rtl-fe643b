// tb_polylut_add_net -- end-to-end test of the whole network, JSC-M
// Lite-Add2 configuration (16 inputs, 64-32-5 neurons, beta 3, F 2, A 2,
// D 3). Two copies run side by side on the same input stream:
//   u_comb: the top at its defaults (pipeline strategy 2, 1 cycle per layer)
//   u_sep : pipeline strategy 1 (a register after the Poly and the Adder
//           part of every layer, 2 cycles per layer)
// Samples are offered with random gaps in in_valid, in bursts of
// back-to-back samples. Checked: every output sample equals the reference
// network, and arrives exactly 3 (u_comb) or 6 (u_sep) cycles after it went
// in. Also counted, and a failure if never seen: results from each
// strategy, bubbles, back-to-back samples, the ReLU quantiser clipping a
// negative value to zero, and non-zero output words.
module tb_polylut_add_net;
  import tb_ref_pkg::*;

  localparam int unsigned NL = 3;
  localparam int unsigned SIZES [NL+1] = '{16, 64, 32, 5};
  localparam int unsigned BETA = 3, FI = 2, AA = 2, DD = 3, SEED = 1;
  localparam int unsigned NI = SIZES[0], NO = SIZES[NL];
  localparam int NCYC = 400;

  logic clk = 0;
  always #5 clk = ~clk;

  logic             rst_n;
  logic             in_valid;
  logic [NI*BETA-1:0] x;
  logic             v_comb, v_sep;
  logic [NO*BETA-1:0] y_comb, y_sep;

  polylut_add_net u_comb (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_x(x),
                          .out_valid(v_comb), .out_y(y_comb));
  polylut_add_net #(.PIPE_STRATEGY(1))
    u_sep (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_x(x),
           .out_valid(v_sep), .out_y(y_sep));

  int checks = 0, failures = 0;
  bit                 vhist [NCYC + 8];
  logic [NO*BETA-1:0] yhist [NCYC + 8];
  int n_valid = 0, n_bubble = 0, n_b2b = 0, n_out_comb = 0, n_out_sep = 0, n_nonzero = 0;

  function automatic logic [NO*BETA-1:0] ref_net(logic [NI*BETA-1:0] xv);
    vec_t a0, a1;
    logic [NO*BETA-1:0] r;
    for (int i = 0; i < MAXN; i++) begin
      a0[i] = 0;
      a1[i] = 0;
    end
    for (int i = 0; i < int'(NI); i++) a0[i] = int'(xv[i*BETA +: BETA]);
    for (int l = 0; l < int'(NL); l++) begin
      layer_out(SEED, l, SIZES[l], SIZES[l+1], BETA, BETA, FI, AA, DD, a0, a1);
      a0 = a1;
    end
    for (int n = 0; n < int'(NO); n++) r[n*BETA +: BETA] = BETA'(a0[n]);
    return r;
  endfunction

  task automatic check_out(string tag, int t, int lat, logic v, logic [NO*BETA-1:0] y,
                           ref int n_out);
    bit want_v;
    want_v = (t >= lat) ? vhist[t-lat] : 1'b0;
    checks++;
    if (v !== want_v) begin
      failures++;
      $display("FAIL %s cycle %0d: out_valid %0b want %0b (latency %0d)", tag, t, v, want_v, lat);
    end
    if (want_v) begin
      n_out++;
      checks++;
      if (y !== yhist[t-lat]) begin
        failures++;
        $display("FAIL %s cycle %0d: y %h want %h", tag, t, y, yhist[t-lat]);
      end
    end
  endtask

  task automatic need(string what, int count);
    checks++;
    $display("%-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL never happened: %s", what);
    end
  endtask

  initial begin
    bit burst;
    rst_n = 1'b0;
    in_valid = 1'b0;
    x = '0;
    burst = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NCYC + 8; t++) begin
      if ($urandom_range(0, 7) == 0) burst = ~burst;
      in_valid = (t < NCYC) && (burst || $urandom_range(0, 2) == 0);
      x = (NI*BETA)'({$urandom, $urandom});
      vhist[t] = in_valid;
      yhist[t] = ref_net(x);
      if (in_valid) n_valid++;
      else n_bubble++;
      for (int n = 0; n < int'(NO); n++) if (in_valid && yhist[t][n*BETA +: BETA] != 0) n_nonzero++;
      if (in_valid && t > 0 && vhist[t-1]) n_b2b++;
      @(posedge clk);
      #1;
      check_out("strategy 2", t + 1, int'(NL), v_comb, y_comb, n_out_comb);
      check_out("strategy 1", t + 1, 2 * int'(NL), v_sep, y_sep, n_out_sep);
    end
    need("samples in", n_valid);
    need("bubbles", n_bubble);
    need("back-to-back samples", n_b2b);
    need("strategy 2 results (3 cyc)", n_out_comb);
    need("strategy 1 results (6 cyc)", n_out_sep);
    need("ReLU clipped to zero", int'(n_relu_zero));
    need("non-zero output words", n_nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
