// tb_polylut_add_workloads -- runs a second published model at its full
// size through the same top level: NID-Add2 (network intrusion detection
// on UNSW-NB15), with 593 one-bit inputs, layers of 100, 100, 50, 50 and 1
// neurons, beta 2, F 3, an input layer with beta 1 and F 6, an output layer
// with F 7, A 2 and D 1 (linear sub-neurons), pipeline strategy 2.
// Random samples are streamed back to back; every result is compared with
// the reference network and must appear exactly 5 cycles (one per layer)
// after its sample. The fourth layer's 50 output words, one cycle earlier,
// are checked the same way (through the hierarchy), because with the
// stand-in weights the single output neuron may well be constant; at least
// some of those words must be non-zero.
module tb_polylut_add_workloads;
  import tb_ref_pkg::*;

  localparam int NL = 5;
  localparam int NS = 60;

  localparam int unsigned N_SIZE [NL+1] = '{593, 100, 100, 50, 50, 1};
  localparam int unsigned N_BETA [NL+1] = '{1, 2, 2, 2, 2, 2};
  localparam int unsigned N_FAN  [NL]   = '{6, 3, 3, 3, 7};
  localparam int unsigned N_D = 1;
  localparam int unsigned AA = 2, SEED = 1;

  localparam int NX_W = N_SIZE[0] * N_BETA[0], NY_W = N_SIZE[NL] * N_BETA[NL];

  logic clk = 0;
  always #5 clk = ~clk;

  logic            rst_n, in_valid;
  logic [NX_W-1:0] nx;
  logic [NY_W-1:0] ny;
  logic            nv;

  polylut_add_net #(.NUM_LAYERS(NL), .LAYER_SIZE(N_SIZE), .LAYER_BETA(N_BETA),
                    .LAYER_FANIN(N_FAN), .A(AA), .D(N_D), .PIPE_STRATEGY(2), .SEED(SEED))
    u_nid (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_x(nx), .out_valid(nv), .out_y(ny));

  int checks = 0, failures = 0;
  localparam int H_W = N_SIZE[NL-1] * N_BETA[NL-1];
  logic [NY_W-1:0] n_exp [NS];
  logic [H_W-1:0]  h_exp [NS];
  int n_nonzero = 0;

  initial begin
    vec_t act, nxt;
    rst_n = 1'b0;
    in_valid = 1'b0;
    nx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NS + NL + 3; t++) begin
      in_valid = (t < NS);
      for (int i = 0; i < NX_W; i++) nx[i] = 1'($urandom);
      if (t < NS) begin
        for (int i = 0; i < MAXN; i++) begin
          act[i] = 0;
          nxt[i] = 0;
        end
        for (int i = 0; i < int'(N_SIZE[0]); i++) act[i] = int'(nx[i]);
        for (int l = 0; l < NL; l++) begin
          layer_out(SEED, l, N_SIZE[l], N_SIZE[l+1], N_BETA[l], N_BETA[l+1], N_FAN[l], AA, N_D,
                    act, nxt);
          act = nxt;
          if (l == NL - 2) begin
            for (int n = 0; n < int'(N_SIZE[NL-1]); n++) begin
              h_exp[t][n*2 +: 2] = 2'(act[n]);
              if (act[n] != 0) n_nonzero++;
            end
          end
        end
        n_exp[t] = NY_W'(act[0]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (nv !== (t + 1 >= NL && t + 1 - NL < NS)) begin
        failures++;
        $display("FAIL cycle %0d: out_valid %0b", t, nv);
      end
      if (t + 1 >= NL - 1 && t + 2 - NL < NS) begin
        checks++;
        if (u_nid.g_layer[NL-2].y !== h_exp[t + 2 - NL]) begin
          failures++;
          $display("FAIL layer %0d, sample %0d", NL - 2, t + 2 - NL);
        end
      end
      if (t + 1 >= NL && t + 1 - NL < NS) begin
        checks++;
        if (ny !== n_exp[t + 1 - NL]) begin
          failures++;
          $display("FAIL sample %0d: %h want %h", t + 1 - NL, ny, n_exp[t + 1 - NL]);
        end
      end
    end
    $display("non-zero words out of layer %0d: %0d", NL - 2, n_nonzero);
    checks++;
    if (n_nonzero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
