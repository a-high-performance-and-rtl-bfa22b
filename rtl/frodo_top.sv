// frodo_top: the FrodoKEM crypto-processor, all security levels.
//
// Connects the instruction dispatch unit, the central controller, the hash
// unit with its 60-to-64 packer, the CDF sampler, the 32-multiplier array, the
// encode/decode unit and the two memory banks (bank 0: 4 x 32 bits x
// BANK0_DEPTH, bank 1: 4 x 32 bits x BANK1_DEPTH; 14 block RAMs at the
// default depths).
//
// Interface
//   level                  : security level (640 / 976 / 1344), held for a run.
//   inst, inst_valid,      : 48-bit instructions; one is accepted in every clock
//   inst_ready               where both are high. An instruction that may not
//                            overlap the running one waits (ready low).
//   host_*                 : 128-bit access to one bank row (all four RAMs at
//                            one address), read data one clock later. Only to
//                            be used while idle is high, to load seeds/keys and
//                            read results.
//   idle                   : no instruction running and none waiting.
//   dual, stall            : two instructions executing / an instruction held
//                            back by a conflict (for performance counting).
//   cmp_eq                 : result of the last CMP.
//
// The block structure and the memory bank sizes follow the processor
// description. The instruction source (the paper's instruction ROM and data
// driver) is outside this module: instructions and data arrive on ports.
module frodo_top
  import frodo_pkg::*;
#(
  parameter int unsigned BANK0_DEPTH_P = 2048,
  parameter int unsigned BANK1_DEPTH_P = 1536
) (
  input  logic         clk,
  input  logic         rst_n,
  input  level_e       level,
  input  instr_t       inst,
  input  logic         inst_valid,
  output logic         inst_ready,
  input  logic         host_en,
  input  logic         host_we,
  input  logic         host_bank,
  input  logic [10:0]  host_addr,
  input  logic [127:0] host_wdata,
  output logic [127:0] host_rdata,
  output logic         idle,
  output logic         dual,
  output logic         stall,
  output logic         cmp_eq
);
  // dispatch
  logic [N_FUNC-1:0] fun_start, fun_done;
  instr_t            fun_inst [N_FUNC];

  dispatch_unit u_dispatch (
    .clk, .rst_n, .inst, .valid (inst_valid), .ready (inst_ready),
    .fun_start, .fun_inst, .fun_done, .idle, .dual
  );
  assign stall = inst_valid && !inst_ready;

  // hash + packer
  logic        h_start, h_shake256, h_din_valid, h_din_last, h_din_req, h_dout_valid, h_dout_ready;
  logic [63:0] h_din, h_dout;
  logic [3:0]  h_din_bytes;
  logic        h_absorbing;
  logic        p_clear, p_d16, p_in_valid, p_in_ready, p_out_valid, p_out_ready;
  logic [63:0] p_in, p_out;

  hash_unit u_hash (
    .clk, .rst_n, .start (h_start), .shake256_i (h_shake256),
    .din (h_din), .din_valid (h_din_valid), .din_last (h_din_last), .din_bytes (h_din_bytes),
    .din_req (h_din_req), .dout (h_dout), .dout_valid (h_dout_valid), .dout_ready (h_dout_ready),
    .absorbing (h_absorbing)
  );

  pack_unit u_pack (
    .clk, .rst_n, .clear (p_clear), .d16 (p_d16),
    .in_data (p_in), .in_valid (p_in_valid), .in_ready (p_in_ready),
    .out_data (p_out), .out_valid (p_out_valid), .out_ready (p_out_ready)
  );

  // sampler
  logic [63:0] s_din, s_dout;
  logic        s_din_valid, s_dout_valid;

  cdf_sampler u_sampler (
    .clk, .rst_n, .level, .din (s_din), .din_valid (s_din_valid),
    .dout (s_dout), .dout_valid (s_dout_valid)
  );

  // multiplier array
  logic m_valid, m_upd, m_sub, m_acc, m_last, m_valid_o;
  logic [1:0][3:0][15:0] m_a, m_e, m_b;
  logic [3:0][3:0][4:0]  m_s;

  mul_array u_array (
    .clk, .rst_n, .valid_i (m_valid), .upd_en (m_upd), .sub_en (m_sub), .acc_en (m_acc),
    .last_i (m_last), .port_a (m_a), .port_s (m_s), .port_e (m_e), .port_b (m_b),
    .valid_o (m_valid_o)
  );

  // encode / decode
  logic        e_start, e_mode, e_rd_req, e_rd_valid, e_out_valid, e_done, e_busy;
  logic [63:0] e_rd_data, e_out;

  edu u_edu (
    .clk, .rst_n, .level, .start (e_start), .mode (e_mode),
    .rd_req (e_rd_req), .rd_data (e_rd_data), .rd_valid (e_rd_valid),
    .out_data (e_out), .out_valid (e_out_valid), .done (e_done), .busy (e_busy)
  );

  // memory
  logic [1:0]                 b_rd0_en, b_rd1_en;
  logic [1:0][3:0][AW-1:0]    b_rd0_addr, b_rd1_addr, b_wr_addr;
  logic [1:0][3:0][31:0]      b_rd0_data, b_rd1_data, b_wr_data;
  logic [1:0][3:0][1:0]       b_wr_en;

  mem_bank #(.DEPTH (BANK0_DEPTH_P), .AW (AW)) u_bank0 (
    .clk, .rd0_en (b_rd0_en[0]), .rd0_addr (b_rd0_addr[0]), .rd0_data (b_rd0_data[0]),
    .rd1_en (b_rd1_en[0]), .rd1_addr (b_rd1_addr[0]), .rd1_data (b_rd1_data[0]),
    .wr_en (b_wr_en[0]), .wr_addr (b_wr_addr[0]), .wr_data (b_wr_data[0])
  );

  mem_bank #(.DEPTH (BANK1_DEPTH_P), .AW (AW)) u_bank1 (
    .clk, .rd0_en (b_rd0_en[1]), .rd0_addr (b_rd0_addr[1]), .rd0_data (b_rd0_data[1]),
    .rd1_en (b_rd1_en[1]), .rd1_addr (b_rd1_addr[1]), .rd1_data (b_rd1_data[1]),
    .wr_en (b_wr_en[1]), .wr_addr (b_wr_addr[1]), .wr_data (b_wr_data[1])
  );

  central_controller #(.CAW (AW)) u_ctrl (
    .clk, .rst_n, .level,
    .fun_start, .fun_inst, .fun_done,
    .h_start, .h_shake256, .h_din, .h_din_valid, .h_din_last, .h_din_bytes, .h_din_req,
    .h_dout, .h_dout_valid, .h_dout_ready,
    .p_clear, .p_d16, .p_in, .p_in_valid, .p_in_ready, .p_out, .p_out_valid, .p_out_ready,
    .s_din, .s_din_valid, .s_dout, .s_dout_valid,
    .m_valid, .m_upd, .m_sub, .m_acc, .m_last, .m_a, .m_s, .m_e, .m_b, .m_valid_o,
    .e_start, .e_mode, .e_rd_req, .e_rd_data, .e_rd_valid, .e_out, .e_out_valid, .e_done,
    .b_rd0_en, .b_rd0_addr, .b_rd0_data, .b_rd1_en, .b_rd1_addr, .b_rd1_data,
    .b_wr_en, .b_wr_addr, .b_wr_data,
    .host_en, .host_we, .host_bank, .host_addr, .host_wdata, .host_rdata,
    .cmp_eq
  );
endmodule
