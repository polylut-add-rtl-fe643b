// tb_truth_table -- checks that truth_table returns entry `addr` of its
// table for every address, for two table shapes. The tables are built in
// the testbench from a simple formula, entry e = (5*e + 3) ^ (e >> 2),
// truncated to the entry width.
module tb_truth_table;
  localparam int unsigned IN1 = 6, OUT1 = 5;
  localparam int unsigned IN2 = 3, OUT2 = 9;

  function automatic int unsigned entry(int unsigned e);
    return (5 * e + 3) ^ (e >> 2);
  endfunction

  function automatic logic [(2**IN1)*OUT1-1:0] mk1();
    logic [(2**IN1)*OUT1-1:0] t;
    for (int unsigned e = 0; e < 2**IN1; e++) t[e*OUT1 +: OUT1] = OUT1'(entry(e));
    return t;
  endfunction
  function automatic logic [(2**IN2)*OUT2-1:0] mk2();
    logic [(2**IN2)*OUT2-1:0] t;
    for (int unsigned e = 0; e < 2**IN2; e++) t[e*OUT2 +: OUT2] = OUT2'(entry(e));
    return t;
  endfunction

  logic clk = 0;
  always #5 clk = ~clk;

  logic [IN1-1:0]  a1;
  logic [OUT1-1:0] d1;
  logic [IN2-1:0]  a2;
  logic [OUT2-1:0] d2;

  truth_table #(.IN_BITS(IN1), .OUT_BITS(OUT1), .TABLE(mk1())) u1 (.addr(a1), .data(d1));
  truth_table #(.IN_BITS(IN2), .OUT_BITS(OUT2), .TABLE(mk2())) u2 (.addr(a2), .data(d2));

  int checks = 0, failures = 0;

  initial begin
    a1 = '0;
    a2 = '0;
    for (int unsigned e = 0; e < 2**IN1; e++) begin
      a1 = IN1'(e);
      a2 = IN2'(e);
      @(posedge clk);
      checks++;
      if (d1 !== OUT1'(entry(e))) begin
        failures++;
        $display("FAIL table1 addr %0d: got %0d want %0d", e, d1, OUT1'(entry(e)));
      end
      if (e < 2**IN2) begin
        checks++;
        if (d2 !== OUT2'(entry(e))) begin
          failures++;
          $display("FAIL table2 addr %0d: got %0d want %0d", e, d2, OUT2'(entry(e)));
        end
      end
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
