// cdf_sampler: four parallel CDF-inversion samplers for the error distribution.
//
// Each 64-bit hash word carries four 16-bit random values r. For each, the
// upper 15 bits t = r[15:1] are compared with all 13 entries of the level's
// cumulative distribution table at once; an adder tree counts the entries
// that t exceeds, which is the magnitude e of the sample, and bit r[0] is the
// sign: the output is e or -e in 16-bit two's complement (sign-extended so
// that it can be added modulo q directly). Every comparator is evaluated for
// every input, so the time taken does not depend on the value drawn.
//
// Interface: din/din_valid in, dout/dout_valid out one clock later; sample k
// of a word comes from bits 16k+15:16k and leaves in the same place. level
// selects the table.
//
// Four datapaths, parallel comparators, adder tree and complement stage are
// the processor's; the table values are those of the FrodoKEM specification
// (entries beyond a level's table are padded with 32767, which no 15-bit t
// exceeds). The single output register is this design's choice.
module cdf_sampler
  import frodo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  level_e      level,
  input  logic [63:0] din,
  input  logic        din_valid,
  output logic [63:0] dout,
  output logic        dout_valid
);
  logic [63:0] smp;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      logic [14:0] t;
      logic [3:0]  e;
      t = din[16*k+1 +: 15];
      e = '0;
      for (int z = 0; z < CDF_LEN; z++)
        e = e + {3'b0, (t > cdf_entry(level, z))};
      smp[16*k +: 16] = din[16*k] ? (16'd0 - {12'd0, e}) : {12'd0, e};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= din_valid;
      if (din_valid) dout <= smp;
    end
  end
endmodule
