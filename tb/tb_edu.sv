// tb_edu: checks Encode and Decode at all three levels.
//
// Encode: a random 64*B-bit message is served one word per request (one clock
// of latency, like a RAM); the 16 output blocks are compared with entries
// computed here as (message bits 4t*B+i*B .. +B-1) * 2^(D-B). The last block
// must appear within 18 clocks of start. Decode: 16 blocks of encoded entries
// with added noise below q/2^(B+1) are served; the B output words must equal
// the original message bits.
module tb_edu;
  import frodo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  level_e      level;
  logic        start, mode, rd_req, rd_valid, out_valid, done, busy;
  logic [63:0] rd_data, out_data;
  int checks = 0, failures = 0;

  edu dut (.*);

  logic [255:0] msg;
  logic [63:0]  src [16];
  int           nsrc;

  // memory model: answers a request one clock later
  int rptr;
  always @(posedge clk) begin
    rd_valid <= rd_req;
    if (rd_req) begin rd_data <= src[rptr]; rptr <= rptr + 1; end
  end

  initial begin
    start = 0; mode = 0; level = LVL_640; rptr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      int B, D, nout, cyc;
      level = level_e'(rep % 3);
      B = int'(level_b(level)); D = int'(level_d(level));
      msg = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      // ---------------- encode
      for (int w = 0; w < 4; w++) src[w] = msg[64*w +: 64];
      @(negedge clk); rptr = 0; mode = 0; start = 1;
      @(negedge clk); start = 0;
      nout = 0; cyc = 1;
      while (nout < 16 && cyc < 40) begin
        if (out_valid) begin
          for (int i = 0; i < 4; i++) begin
            automatic int e = 4 * nout + i;
            automatic logic [15:0] k = 16'((msg >> (e * B)) & ((1 << B) - 1));
            checks++;
            if (out_data[16*i +: 16] !== 16'(k << (D - B))) begin
              failures++;
              $display("enc lvl %0d entry %0d got %h exp %h", level, e, out_data[16*i +: 16], k << (D - B));
            end
          end
          nout++;
        end
        @(negedge clk); cyc++;
      end
      checks++;
      if (nout != 16 || cyc > 19) begin
        failures++; $display("encode took %0d clocks for %0d blocks", cyc, nout);
      end
      // ---------------- decode
      for (int t = 0; t < 16; t++)
        for (int i = 0; i < 4; i++) begin
          automatic int e = 4 * t + i;
          automatic int k = int'((msg >> (e * B)) & ((1 << B) - 1));
          automatic int noise = int'($urandom % (1 << (D - B - 1))) - (1 << (D - B - 2));
          src[t][16*i +: 16] = 16'((k << (D - B)) + noise);
          if (D == 15) src[t][16*i + 15] = 1'($urandom);   // bit above D ignored
        end
      @(negedge clk); rptr = 0; mode = 1; start = 1;
      @(negedge clk); start = 0;
      nout = 0; cyc = 1;
      while (!done && cyc < 40) begin
        if (out_valid) begin
          checks++;
          if (out_data !== msg[64*nout +: 64]) begin
            failures++;
            $display("dec lvl %0d word %0d got %h exp %h", level, nout, out_data, msg[64*nout +: 64]);
          end
          nout++;
        end
        @(negedge clk); cyc++;
      end
      if (out_valid) nout++;
      checks++;
      if (nout != B) begin failures++; $display("decode gave %0d words", nout); end
    end
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
