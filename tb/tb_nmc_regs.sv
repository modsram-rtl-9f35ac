// tb_nmc_regs -- checks the near-memory registers and shifters at n = 8.
// A multiplier is loaded and, over the five radix-4 iterations of an 8-bit
// multiplier, random XOR3/MAJ words are presented to the CSA operations. The
// testbench checks: the Booth triple seen by the encoder after each shift
// (taken straight from the multiplier bits), the captured sum and carry, the
// overflow index (bits pushed out by sum<<2 and carry<<3 plus the MAJ MSB),
// all four write-back shifts, the modulus load and the clear.
module tb_nmc_regs;
  import modsram_pkg::*;
  localparam int N = 8;
  localparam int W = N + 1;
  logic          clk = 0, rst_n = 0;
  nmc_op_t       op;
  logic [W-1:0]  xor3, maj, data, wdata, sum_q, carry_q;
  logic [2:0]    digit_bits;
  logic [3:0]    ov_idx_q;
  logic [N-1:0]  mod_q;
  logic          ov_err;
  int checks = 0, failures = 0;

  nmc_regs #(.N(N)) dut (.clk, .rst_n, .op, .xor3, .maj, .data, .digit_bits, .ov_idx_q,
                         .wdata, .sum_q, .carry_q, .mod_q, .ov_err);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [W-1:0] got, input logic [W-1:0] ex);
    checks++;
    if (got !== ex) begin failures++; $display("FAIL %s got %h exp %h", what, got, ex); end
  endtask

  task automatic step(input nmc_op_t o);
    @(negedge clk); op = o;
  endtask

  initial begin
    logic [N-1:0] a;
    logic [W-1:0] s_prev, c_prev;
    op = NMC_IDLE; xor3 = '0; maj = '0; data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      a = N'($urandom);
      step(NMC_CLEAR);
      @(negedge clk);
      chk("clear sum", sum_q, '0); chk("clear carry", carry_q, '0); chk("clear ov", W'(ov_idx_q), '0);
      op = NMC_LOAD_A; data = {1'b1, a};   // top bit must be ignored
      s_prev = '0; c_prev = '0;
      for (int i = N / 2; i >= 0; i--) begin
        logic [N+2:0] aext;
        logic [3:0]   ex_ov;
        aext = {2'b00, a, 1'b0};            // aext[k+1] = a_k
        @(negedge clk);
        // Booth triple (a_{2i+1}, a_{2i}, a_{2i-1})
        chk($sformatf("triple i=%0d", i), W'(digit_bits), W'(aext[2*i+2 -: 3]));
        op = NMC_CSA_R4; xor3 = W'($urandom); maj = W'($urandom);
        ex_ov = 4'(s_prev[W-1 -: 2]) + 4'(c_prev[W-1 -: 3]) + 4'(maj[W-1]);
        @(negedge clk);
        chk("r4 sum", sum_q, xor3); chk("r4 carry", carry_q, maj);
        chk("ov idx", W'(ov_idx_q), W'(ex_ov));
        op = NMC_WB_SUM;   #1 chk("wb sum", wdata, sum_q);
        @(negedge clk);
        op = NMC_WB_CARRY; #1 chk("wb carry<<1", wdata, carry_q << 1);
        @(negedge clk);
        op = NMC_CSA_OV; xor3 = W'($urandom); maj = W'($urandom);
        @(negedge clk);
        chk("ov sum", sum_q, xor3); chk("ov carry", carry_q, maj);
        s_prev = sum_q; c_prev = carry_q;
        op = NMC_WB_SUM2;   #1 chk("wb sum<<2", wdata, sum_q << 2);
        @(negedge clk);
        op = NMC_WB_CARRY2; #1 chk("wb carry<<3", wdata, carry_q << 3);
        // digit bits only change on CSA_R4
        chk("triple hold", W'(digit_bits), W'((i > 0) ? aext[2*i -: 3] : 3'b000));
      end
      @(negedge clk);
      op = NMC_LOAD_P; data = W'($urandom);
      @(negedge clk);
      chk("mod", W'(mod_q), W'(data[N-1:0]));
      op = NMC_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
