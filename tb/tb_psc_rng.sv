// tb_psc_rng -- self-checking testbench for psc_rng.
//
// Checks, against a reference xorshift32 written here: the value after
// reset is the seed's top bits; every stepped number follows the
// recurrence; the number holds when step is low. It also checks that the
// mean of 20000 numbers lies within 2% of mid-range and that every one of
// the 16 top-nibble buckets is hit roughly equally (uniformity is what the
// probabilistic counter relies on).
module tb_psc_rng;
  localparam int unsigned W = 16;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0, step = 0;
  logic [W-1:0] rnd;
  int checks = 0, failures = 0;

  psc_rng #(.PROB_W(W), .SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .step(step), .rnd(rnd));

  always #5 clk = ~clk;

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_x;
    real sum;
    int bucket [16];
    sum = 0.0;
    foreach (bucket[i]) bucket[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    ref_x = SEED;
    check(rnd == ref_x[31 -: W], "seed after reset");
    // hold
    repeat (3) @(posedge clk);
    #1 check(rnd == ref_x[31 -: W], "hold without step");
    // stepping
    for (int i = 0; i < 20000; i++) begin
      step = 1;
      @(posedge clk); #1;
      ref_x = xs(ref_x);
      if (i < 2000) check(rnd == ref_x[31 -: W], $sformatf("step %0d", i));
      else if (rnd != ref_x[31 -: W]) begin failures++; checks++; end
      sum += real'(rnd);
      bucket[rnd[W-1 -: 4]]++;
      if (i % 7 == 3) begin
        step = 0;
        @(posedge clk); #1;
        if (rnd != ref_x[31 -: W]) begin failures++; checks++; end
      end
    end
    step = 0;
    check((sum / 20000.0) > 0.98 * 32767.5 && (sum / 20000.0) < 1.02 * 32767.5,
          $sformatf("mean %f", sum / 20000.0));
    foreach (bucket[i])
      check(bucket[i] > 1050 && bucket[i] < 1450, $sformatf("bucket %0d = %0d", i, bucket[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
