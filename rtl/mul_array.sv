// mul_array: the reconfigurable 32-multiplier array.
//
// Every clock the array can compute one block operation
//     B(2x4) = A(2x4) * S(4x4) + E(2x4)        (mod 2^16)
// with 32 multipliers (one per A-row, S-row, S-column triple) and eight adder
// trees (one per result entry). A and E entries are 16-bit values mod q; S
// entries are small signed samples given as 5-bit two's complement. No
// general multiplier is used: each S entry is split into a sign and a 4-bit
// magnitude, the 16-bit A entry is multiplied by the magnitude (a 16x4
// product, three additions), and the sign, XORed with sub_en, decides whether
// the product is complemented before the adder tree. Truncating to 16 bits is
// the reduction mod q (the caller keeps the low D bits).
//
// Pipeline (three register stages): input registers (A, E, and the S
// register, which only loads when valid_i and upd_en are both high, so S can
// be preloaded and held) -> product and sign registers -> complement, adder
// tree, addend selection, accumulation register. acc_en selects the addend:
// 0 = PortE, 1 = the accumulation register.
//
// Two modes, chosen by the control inputs, not by a mode pin:
//   MAC  preload E (valid_i, upd_en, acc_en = 0, PortA driven to zero), then
//        stream A and S with upd_en = 1 and acc_en = 1; last_i on the final
//        beat makes valid_o rise with the finished block.
//   MA   preload S (valid_i, upd_en = 1, PortA zero), then stream A and E with
//        upd_en = 0, acc_en = 0; every beat yields one result block.
// valid_o rises three clocks after the beat that produced the block.
//
// The array size, operand widths, sign-magnitude multiplier, control names
// (valid_i, upd_en, sub_en, acc_en, valid_o) and the two modes follow the
// processor description. Where its timing figure and its text disagree on
// which mode preloads E, this design follows the text (MAC preloads E). The
// last_i input, the zero A during preloads and the exact valid_o rule are this
// design's own choices.
module mul_array (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  logic              upd_en,
  input  logic              sub_en,
  input  logic              acc_en,
  input  logic              last_i,
  input  logic [1:0][3:0][15:0] port_a,   // [row][k]
  input  logic [3:0][3:0][4:0]  port_s,   // [k][col]
  input  logic [1:0][3:0][15:0] port_e,   // [row][col]
  output logic [1:0][3:0][15:0] port_b,   // [row][col]
  output logic              valid_o
);
  // stage 1
  logic [1:0][3:0][15:0] a1, e1;
  logic [3:0][3:0][4:0]  s1;
  logic                  v1, upd1, sub1, acc1, last1;
  // stage 2
  logic [1:0][3:0][3:0][15:0] prod2;   // [row][k][col]
  logic [1:0][3:0][3:0]       sgn2;
  logic [1:0][3:0][15:0]      e2;
  logic                       v2, upd2, sub2, acc2, last2;
  // stage 3
  logic [1:0][3:0][15:0] acc;
  logic [1:0][3:0][15:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a1 <= '0; e1 <= '0; s1 <= '0;
      v1 <= 1'b0; upd1 <= 1'b0; sub1 <= 1'b0; acc1 <= 1'b0; last1 <= 1'b0;
    end else begin
      a1 <= port_a;
      e1 <= port_e;
      if (valid_i && upd_en) s1 <= port_s;   // preload / stream S
      v1 <= valid_i; upd1 <= upd_en; sub1 <= sub_en; acc1 <= acc_en; last1 <= last_i;
    end
  end

  // sign and absolute-value extraction, 16x4 unsigned products
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod2 <= '0; sgn2 <= '0; e2 <= '0;
      v2 <= 1'b0; upd2 <= 1'b0; sub2 <= 1'b0; acc2 <= 1'b0; last2 <= 1'b0;
    end else begin
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < 4; k++)
          for (int c = 0; c < 4; c++) begin
            logic [4:0] s;
            logic [3:0] mag;
            s   = s1[k][c];
            mag = s[4] ? 4'(5'd0 - s) : s[3:0];
            prod2[r][k][c] <= 16'(a1[r][k] * mag);
            sgn2[r][k][c]  <= s[4];
          end
      e2 <= e1;
      v2 <= v1; upd2 <= upd1; sub2 <= sub1; acc2 <= acc1; last2 <= last1;
    end
  end

  // complement, adder tree, addend selection
  always_comb begin
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 4; c++) begin
        logic [15:0] t [4];
        for (int k = 0; k < 4; k++)
          t[k] = (sgn2[r][k][c] ^ sub2) ? (16'd0 - prod2[r][k][c]) : prod2[r][k][c];
        sum[r][c] = ((t[0] + t[1]) + (t[2] + t[3])) + (acc2 ? acc[r][c] : e2[r][c]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      valid_o <= 1'b0;
    end else begin
      if (v2) acc <= sum;
      valid_o <= v2 && (last2 || (!upd2 && !acc2));
    end
  end

  assign port_b = acc;
endmodule
