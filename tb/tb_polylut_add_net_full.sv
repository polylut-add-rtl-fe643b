// tb_polylut_add_net_full -- the network at its default size and settings
// (JSC-M Lite-Add2, pipeline strategy 2), untouched parameters. 200 random
// samples are streamed back to back, one per cycle, then the pipeline
// drains. Each result must equal the reference network and appear exactly
// 3 cycles (one per layer) after its sample went in; out_valid must be low
// at all other times.
module tb_polylut_add_net_full;
  import tb_ref_pkg::*;

  localparam int unsigned NL = 3;
  localparam int unsigned SIZES [NL+1] = '{16, 64, 32, 5};
  localparam int unsigned BETA = 3, FI = 2, AA = 2, DD = 3, SEED = 1;
  localparam int unsigned NI = SIZES[0], NO = SIZES[NL];
  localparam int NS = 200;
  localparam int LAT = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n;
  logic               in_valid;
  logic [NI*BETA-1:0] x;
  logic               out_valid;
  logic [NO*BETA-1:0] y;

  polylut_add_net u_dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_x(x),
                         .out_valid(out_valid), .out_y(y));

  int checks = 0, failures = 0;
  logic [NO*BETA-1:0] expect_y [NS];
  int n_out = 0;

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

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NS + LAT + 4; t++) begin
      in_valid = (t < NS);
      x = (NI*BETA)'({$urandom, $urandom});
      if (t < NS) expect_y[t] = ref_net(x);
      @(posedge clk);
      #1;
      // after this edge the output holds sample t+1-LAT
      checks++;
      if (out_valid !== (t + 1 >= LAT && t + 1 - LAT < NS)) begin
        failures++;
        $display("FAIL cycle %0d: out_valid %0b", t, out_valid);
      end
      if (out_valid && t + 1 >= LAT && t + 1 - LAT < NS) begin
        n_out++;
        checks++;
        if (y !== expect_y[t + 1 - LAT]) begin
          failures++;
          $display("FAIL sample %0d: y %h want %h", t + 1 - LAT, y, expect_y[t + 1 - LAT]);
        end
      end
    end
    checks++;
    if (n_out != NS) begin
      failures++;
      $display("FAIL %0d results for %0d samples", n_out, NS);
    end
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
