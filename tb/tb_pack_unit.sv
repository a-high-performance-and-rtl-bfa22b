// tb_pack_unit: checks the 60-to-64 packer against a bit-by-bit model.
//
// For D = 15 it sends 64 random entries (16 input words) and expects 15
// output words; for D = 16 it sends 32 entries and expects 8 words. The
// expected bytes are built one bit at a time: entry bits most significant
// first, stream bit 8k+7-j as bit j of byte k. The source answers in_ready
// with one clock of latency and the sink stalls now and then.
module tb_pack_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, d16, in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  int checks = 0, failures = 0;

  pack_unit dut (.*);

  logic [15:0] ent [64];
  logic [7:0]  exp_bytes [128];

  task automatic run(input bit wide, input int nent);
    int d = wide ? 16 : 15;
    int nbits = nent * d;
    int sent = 0, got = 0, nout = nbits / 64;
    logic [63:0] e;
    for (int i = 0; i < nent; i++) ent[i] = 16'($urandom) & (wide ? 16'hFFFF : 16'h7FFF);
    for (int k = 0; k < nbits / 8; k++) exp_bytes[k] = '0;
    for (int i = 0; i < nent; i++)
      for (int b = 0; b < d; b++) begin
        int pos = i * d + b;                    // stream position
        exp_bytes[pos / 8][7 - pos % 8] = ent[i][d - 1 - b];
      end
    @(negedge clk); d16 = wide; clear = 1;
    @(negedge clk); clear = 0;
    while (got < nout) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int k = 0; k < 8; k++) e[8*k +: 8] = exp_bytes[8*got + k];
        checks++;
        if (out_data !== e) begin
          failures++;
          $display("D=%0d word %0d got %h exp %h", d, got, out_data, e);
        end
        got++;
      end
      #1;
      out_ready = ($urandom % 4) != 0;
      in_valid = 0;
      if (in_ready && sent < nent) begin
        in_data = {ent[sent+3], ent[sent+2], ent[sent+1], ent[sent]};
        in_valid = 1;
        sent += 4;
      end
    end
    in_valid = 0;
  endtask

  initial begin
    clear = 0; d16 = 0; in_valid = 0; in_data = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 64);
    run(1, 32);
    run(0, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
