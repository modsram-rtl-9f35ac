// modsram_ctrl -- controller of the ModSRAM macro.
//
// A finite-state machine that drives the wordline decoders, the sense-amplifier
// enable, the near-memory operation and the write-data source. One modular
// multiplication C = A*B mod p runs as:
//
//   LOAD_A   read the multiplier row into the multiplier register      1 cycle
//   per iteration (ITER = floor(n/2)+1 of them, most significant digit first):
//     R4_RD  open sum, carry and the LUT-radix4 row of the Booth digit;
//            capture XOR3/MAJ                                          1 cycle
//     R4_WS  write sum back                                            1 cycle
//     R4_WC  write carry<<1 back                                       1 cycle
//     OV_RD  open sum, carry and the LUT-overflow row of the overflow
//            index; capture XOR3/MAJ                                   1 cycle
//     OV_WS  write sum<<2 back                                         1 cycle
//     OV_WC  write carry<<3 back                                       1 cycle
//   the last iteration skips OV_WS/OV_WC: its sum and carry stay in the
//   registers for the final addition. The loop therefore takes 6*ITER-1
//   cycles (773 for n = 256).
//   LOAD_P   read the modulus row into the freed multiplier register and
//            start the final adder                                     1 cycle
//   REDUCE   wait for the final adder's reduction                      1+k cycles
//   WB_RES   write the result to the result row; done pulses           1 cycle
//
// In the first iteration sum and carry are zero, so their rows are not opened
// and need no clearing. The order of the six steps follows the paper's worked
// example and text (sum written before carry); the host interface, the row
// choices, the skipped first-iteration reads and the skipped last write-back
// are this design's choices.
//
// pre_en asks the bitline precharge devices to hold the read bitlines high;
// it is low exactly in the cycles that open read wordlines.
//
// Host access while idle: rd_en opens one row (port 0) with the SAs enabled,
// wr_en writes the host data to one row; both may happen in the same cycle.
// start has priority over them and is ignored while busy. Reset is
// asynchronous, active low.
module modsram_ctrl
  import modsram_pkg::*;
#(
  parameter int unsigned N    = 256,
  parameter int unsigned ITER = N / 2 + 1,
  parameter int unsigned IW   = $clog2(ITER + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host
  input  logic                         start,
  input  logic [ROW_AW-1:0]            a_row,
  input  logic [ROW_AW-1:0]            p_row,
  input  logic [ROW_AW-1:0]            c_row,
  input  logic                         rd_en,
  input  logic [ROW_AW-1:0]            rd_row,
  input  logic                         wr_en,
  input  logic [ROW_AW-1:0]            wr_row,
  output logic                         busy,
  output logic                         done,
  output logic                         rd_valid,
  // datapath
  input  logic [ROW_AW-1:0]            lut_row,
  input  logic                         fa_done,
  output logic                         sel_ov,
  output logic [2:0]                   rd_port_en,
  output logic [2:0][ROW_AW-1:0]       rd_port_addr,
  output logic                         wr_port_en,
  output logic [ROW_AW-1:0]            wr_port_addr,
  output wsel_t                        wsel,
  output logic                         sa_en,
  output logic                         pre_en,
  output nmc_op_t                      nmc_op,
  output logic                         fa_start
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD_A, S_R4_RD, S_R4_WS, S_R4_WC,
    S_OV_RD, S_OV_WS, S_OV_WC, S_LOAD_P, S_REDUCE, S_WB_RES
  } state_t;

  state_t            state_q, state_d;
  logic [IW-1:0]     iter_q, iter_d;
  logic              first_q, first_d;
  logic [ROW_AW-1:0] a_row_q, p_row_q, c_row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      iter_q   <= '0;
      first_q  <= 1'b0;
      a_row_q  <= '0;
      p_row_q  <= '0;
      c_row_q  <= '0;
      rd_valid <= 1'b0;
    end else begin
      state_q  <= state_d;
      iter_q   <= iter_d;
      first_q  <= first_d;
      rd_valid <= (state_q == S_IDLE) && !start && rd_en;
      if (state_q == S_IDLE && start) begin
        a_row_q <= a_row;
        p_row_q <= p_row;
        c_row_q <= c_row;
      end
    end
  end

  always_comb begin
    state_d      = state_q;
    iter_d       = iter_q;
    first_d      = first_q;
    sel_ov       = 1'b0;
    rd_port_en   = '0;
    rd_port_addr = '{default: '0};
    wr_port_en   = 1'b0;
    wr_port_addr = '0;
    wsel         = WSEL_NMC;
    sa_en        = 1'b0;
    nmc_op       = NMC_IDLE;
    fa_start     = 1'b0;
    done         = 1'b0;

    unique case (state_q)
      S_IDLE: begin
        if (start) begin
          nmc_op  = NMC_CLEAR;
          iter_d  = IW'(ITER - 1);
          first_d = 1'b1;
          state_d = S_LOAD_A;
        end else begin
          if (rd_en) begin
            rd_port_en[0]   = 1'b1;
            rd_port_addr[0] = rd_row;
            sa_en           = 1'b1;
          end
          if (wr_en) begin
            wr_port_en   = 1'b1;
            wr_port_addr = wr_row;
            wsel         = WSEL_HOST;
          end
        end
      end
      S_LOAD_A: begin
        rd_port_en[0]   = 1'b1;
        rd_port_addr[0] = a_row_q;
        sa_en           = 1'b1;
        nmc_op          = NMC_LOAD_A;
        state_d         = S_R4_RD;
      end
      S_R4_RD, S_OV_RD: begin
        sel_ov          = (state_q == S_OV_RD);
        // sum and carry are still zero (never written) in the first radix-4 read
        rd_port_en      = (first_q && state_q == S_R4_RD) ? 3'b100 : 3'b111;
        rd_port_addr[0] = ROW_AW'(ROW_SUM);
        rd_port_addr[1] = ROW_AW'(ROW_CARRY);
        rd_port_addr[2] = lut_row;
        sa_en           = 1'b1;
        if (state_q == S_R4_RD) begin
          nmc_op  = NMC_CSA_R4;
          state_d = S_R4_WS;
        end else begin
          nmc_op  = NMC_CSA_OV;
          state_d = (iter_q == '0) ? S_LOAD_P : S_OV_WS;
        end
      end
      S_R4_WS, S_R4_WC, S_OV_WS, S_OV_WC: begin
        wr_port_en = 1'b1;
        unique case (state_q)
          S_R4_WS: begin nmc_op = NMC_WB_SUM;    wr_port_addr = ROW_AW'(ROW_SUM);   state_d = S_R4_WC; end
          S_R4_WC: begin nmc_op = NMC_WB_CARRY;  wr_port_addr = ROW_AW'(ROW_CARRY); state_d = S_OV_RD; end
          S_OV_WS: begin nmc_op = NMC_WB_SUM2;   wr_port_addr = ROW_AW'(ROW_SUM);   state_d = S_OV_WC; end
          default: begin
            nmc_op       = NMC_WB_CARRY2;
            wr_port_addr = ROW_AW'(ROW_CARRY);
            iter_d       = iter_q - 1'b1;
            first_d      = 1'b0;
            state_d      = S_R4_RD;
          end
        endcase
      end
      S_LOAD_P: begin
        rd_port_en[0]   = 1'b1;
        rd_port_addr[0] = p_row_q;
        sa_en           = 1'b1;
        nmc_op          = NMC_LOAD_P;
        fa_start        = 1'b1;
        state_d         = S_REDUCE;
      end
      S_REDUCE: begin
        if (fa_done) state_d = S_WB_RES;
      end
      S_WB_RES: begin
        wr_port_en   = 1'b1;
        wr_port_addr = c_row_q;
        wsel         = WSEL_RESULT;
        done         = 1'b1;
        state_d      = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  assign busy = (state_q != S_IDLE);

  // Read bitlines are held precharged in every cycle that opens no read
  // wordline and released for the cycles that do.
  assign pre_en = ~|rd_port_en;

  // The host must not start a product that would overwrite the working rows.
  a_result_row_ok: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == S_IDLE && start) |-> (c_row != ROW_AW'(ROW_SUM) && c_row != ROW_AW'(ROW_CARRY)))
    else $error("modsram_ctrl: result row collides with the sum/carry rows");

endmodule
