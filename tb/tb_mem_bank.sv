// tb_mem_bank: checks per-RAM addressing, half-word writes and read latency.
//
// Random writes (each RAM its own address, each 16-bit half its own enable)
// are mirrored in a model array; random reads on both ports, each RAM at its
// own address, must return the model's word one clock later.
module tb_mem_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int D = 64;
  logic             rd0_en, rd1_en;
  logic [3:0][5:0]  rd0_addr, rd1_addr, wr_addr;
  logic [3:0][31:0] rd0_data, rd1_data, wr_data;
  logic [3:0][1:0]  wr_en;
  int checks = 0, failures = 0;
  logic [31:0] model [4][D];

  mem_bank #(.DEPTH(D), .AW(6)) dut (.*);

  initial begin
    rd0_en = 0; rd1_en = 0; wr_en = '0; rd0_addr = '0; rd1_addr = '0; wr_addr = '0; wr_data = '0;
    // fill everything
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      for (int m = 0; m < 4; m++) begin
        wr_addr[m] = 6'(a); wr_data[m] = $urandom; wr_en[m] = 2'b11;
        model[m][a] = wr_data[m];
      end
    end
    for (int it = 0; it < 500; it++) begin
      logic [3:0][31:0] e0, e1;
      @(negedge clk);
      rd0_en = 1; rd1_en = 1;
      for (int m = 0; m < 4; m++) begin
        rd0_addr[m] = 6'($urandom); rd1_addr[m] = 6'($urandom);
        e0[m] = model[m][rd0_addr[m]]; e1[m] = model[m][rd1_addr[m]];
        wr_addr[m] = 6'($urandom); wr_data[m] = $urandom; wr_en[m] = 2'($urandom);
        if (wr_en[m][0]) model[m][wr_addr[m]][15:0]  = wr_data[m][15:0];
        if (wr_en[m][1]) model[m][wr_addr[m]][31:16] = wr_data[m][31:16];
      end
      @(negedge clk);
      rd0_en = 0; rd1_en = 0; wr_en = '0;
      checks += 2;
      if (rd0_data !== e0) begin failures++; $display("port 0 got %h exp %h", rd0_data, e0); end
      if (rd1_data !== e1) begin failures++; $display("port 1 got %h exp %h", rd1_data, e1); end
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
