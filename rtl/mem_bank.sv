// mem_bank: one memory bank, split along the word width into four RAMs.
//
// Each bank is 128 bits wide, made of four 32-bit RAM blocks (RAM0..RAM3) that
// take separate addresses, so a 2x4 block can be read with one address in all
// four RAMs and a 4x2 block with two different addresses (the interleaved
// layout the controller uses). A RAM word holds two 16-bit entries or four
// 8-bit entries; writes have a separate enable for each 16-bit half.
//
// Ports: two read ports (rd0, rd1) with one clock of latency and one write
// port. A read and a write of the same word in the same clock return the old
// word. No reset: the contents are whatever was written.
//
// The bank split, the four 32-bit RAMs and the per-RAM addressing follow the
// processor description (bank 0 is 2048 words deep, bank 1 1536). The second
// read port is this design's choice: it lets the left operand and the S block
// be read from the same bank in one clock; block RAMs give two ports, so on an
// FPGA a bank that also takes writes in that clock would need the write
// scheduled apart.
module mem_bank #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = 11
) (
  input  logic                 clk,
  input  logic                 rd0_en,
  input  logic [3:0][AW-1:0]   rd0_addr,
  output logic [3:0][31:0]     rd0_data,
  input  logic                 rd1_en,
  input  logic [3:0][AW-1:0]   rd1_addr,
  output logic [3:0][31:0]     rd1_data,
  input  logic [3:0][1:0]      wr_en,
  input  logic [3:0][AW-1:0]   wr_addr,
  input  logic [3:0][31:0]     wr_data
);
  for (genvar m = 0; m < 4; m++) begin : g_ram
    logic [31:0] ram [DEPTH];
    always_ff @(posedge clk) begin
      if (rd0_en) rd0_data[m] <= ram[rd0_addr[m]];
      if (rd1_en) rd1_data[m] <= ram[rd1_addr[m]];
      if (wr_en[m][0]) ram[wr_addr[m]][15:0]  <= wr_data[m][15:0];
      if (wr_en[m][1]) ram[wr_addr[m]][31:16] <= wr_data[m][31:16];
    end
  end
endmodule
