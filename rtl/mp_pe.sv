// mp_pe: multi-precision processing element of the tensor core.
//
// The PE holds sixteen 4-bit multipliers. Depending on the precision they form one
// 16x16-bit product (PP = 1), four 8x8-bit products (PP = 4) or sixteen 4x4-bit
// products (PP = 16); all products of one cycle are summed and added to a 32-bit
// accumulator that stays in the PE (output-stationary). A wide multiplication is
// split into 4-bit digits: digit products are shifted by 4*(i+j) and summed, and
// only the top digit of a signed operand is treated as signed, so every multiplier
// takes two 4-bit digits plus a "signed" flag per digit.
//
// Operand packing (this design's choice): element e of an operand word sits at
// bits [e*P +: P] for P = 16, 8 or 4; only the low 16, 32 or 64 bits are used.
// All elements are two's-complement signed integers.
//
// Timing: inputs x_i/w_i with their control (valid, first, last) are registered
// and forwarded to the right (x and control) and downwards (w) one cycle later,
// which is the store-and-forward behaviour of the paper. The product of the
// registered operands updates the accumulator in the same cycle; when "last" is
// set the final sum is copied into res_o and res_valid_o pulses for one cycle
// (one cycle after the forwarded operands appear at x_o/w_o).
module mp_pe
  import speed_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  input  prec_e               prec_i,
  // operands and control from the left / top neighbour
  input  logic [WORD_W-1:0]   x_i,
  input  logic [WORD_W-1:0]   w_i,
  input  logic                valid_i,
  input  logic                first_i,   // start a new accumulation with this product
  input  logic                last_i,    // this product completes the output
  // forwarded to the right / bottom neighbour
  output logic [WORD_W-1:0]   x_o,
  output logic [WORD_W-1:0]   w_o,
  output logic                valid_o,
  output logic                first_o,
  output logic                last_o,
  // result
  output logic [RES_W-1:0]    res_o,
  output logic                res_valid_o
);

  logic [WORD_W-1:0] x_q, w_q;
  logic              valid_q, first_q, last_q;
  logic [RES_W-1:0]  acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      x_q     <= '0;
      w_q     <= '0;
      valid_q <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      x_q     <= x_i;
      w_q     <= w_i;
      valid_q <= valid_i;
      first_q <= first_i;
      last_q  <= last_i;
    end
  end

  assign x_o     = x_q;
  assign w_o     = w_q;
  assign valid_o = valid_q;
  assign first_o = first_q;
  assign last_o  = last_q;

  // ------------------------------------------------------------------
  // Sixteen signed-digit 4-bit multipliers
  // ------------------------------------------------------------------
  logic signed [31:0] prod_sum;

  always_comb begin
    int unsigned xi, wi, sh;
    logic        xs, ws;
    logic signed [4:0] a, b;
    logic signed [9:0] p;
    prod_sum = '0;
    for (int unsigned m = 0; m < 16; m++) begin
      case (prec_i)
        PREC_4: begin
          xi = m; wi = m; sh = 0; xs = 1'b1; ws = 1'b1;
        end
        PREC_8: begin
          // element m/4, digit pair (m%4)/2 of x and m%2 of w
          xi = 2 * (m / 4) + (m % 4) / 2;
          wi = 2 * (m / 4) + (m % 2);
          sh = 4 * (((m % 4) / 2) + (m % 2));
          xs = ((m % 4) / 2) == 1;
          ws = (m % 2) == 1;
        end
        default: begin // PREC_16
          xi = m / 4; wi = m % 4; sh = 4 * (xi + wi);
          xs = (xi == 3); ws = (wi == 3);
        end
      endcase
      a = {xs & x_q[4*xi+3], x_q[4*xi +: 4]};
      b = {ws & w_q[4*wi+3], w_q[4*wi +: 4]};
      p = a * b;
      prod_sum = prod_sum + (32'(p) <<< sh);
    end
  end

  logic [RES_W-1:0] acc_next;
  assign acc_next = (first_q ? '0 : acc_q) + RES_W'(prod_sum);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q       <= '0;
      res_o       <= '0;
      res_valid_o <= 1'b0;
    end else begin
      res_valid_o <= 1'b0;
      if (valid_q) begin
        acc_q <= acc_next;
        if (last_q) begin
          res_o       <= acc_next;
          res_valid_o <= 1'b1;
        end
      end
    end
  end

endmodule
