// tb_final_adder -- checks the final addition and reduction.
// Random sum/carry words of n+1 bits and moduli with the top bit set must
// give (sum + 2*carry) mod p, with done rising after 1 + k cycles where k is
// the number of subtractions, k <= 12. A few small moduli exercise long
// reductions. Runs at n = 256.
module tb_final_adder;
  import mm_ref_pkg::*;
  localparam int N = 256;
  logic           clk = 0, rst_n = 0, start = 0;
  logic [N:0]     sum_in, carry_in;
  logic [N-1:0]   p, result;
  logic           done;
  int checks = 0, failures = 0;

  final_adder #(.N(N)) dut (.clk, .rst_n, .start, .sum_in, .carry_in, .p, .result, .done);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input big_t s, input big_t c, input big_t pp);
    big_t tot, ex;
    int cyc, k;
    tot = s + (c << 1);
    ex  = tot % pp;
    k   = int'(tot / pp);
    @(negedge clk);
    sum_in = s[N:0]; carry_in = c[N:0]; p = pp[N-1:0]; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (big_t'(result) != ex) begin
      failures++; $display("FAIL result %h exp %h", result, ex[N-1:0]);
    end
    checks++;
    if (cyc != k + 1) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, k + 1); end
    if (pp >= (big_t'(1) << (N - 1))) begin
      checks++;
      if (k > 12) begin failures++; $display("FAIL %0d subtractions", k); end
    end
  endtask

  initial begin
    sum_in = '0; carry_in = '0; p = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      big_t pp;
      pp = rand_bits(N);
      pp[N-1] = 1'b1;
      run(rand_bits(N + 1), rand_bits(N + 1), pp);
    end
    // all ones: the largest possible total
    run((big_t'(1) << (N + 1)) - 1, (big_t'(1) << (N + 1)) - 1, (big_t'(1) << (N - 1)) + 1);
    // small moduli
    run(big_t'(1000), big_t'(333), big_t'(7));
    run(big_t'(5), big_t'(0), big_t'(11));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
