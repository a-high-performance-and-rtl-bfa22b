// tb_cdf_sampler: checks the four sampling lanes against a table-walk model.
//
// For each level it feeds 400 random words plus the boundary values around
// every table entry, and compares every lane with a reference that walks the
// specification's table (its own copy) the way the specification's pseudocode
// does. It also checks the one-clock latency and that the largest magnitude
// seen equals the table length minus one (12, 10, 6 for the three levels).
module tb_cdf_sampler;
  import frodo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  level_e      level;
  logic [63:0] din, dout;
  logic        din_valid, dout_valid;
  int checks = 0, failures = 0;

  cdf_sampler dut (.*);

  int T640 [13] = '{4643, 13363, 20579, 25843, 29227, 31145, 32103, 32525, 32689,
                    32745, 32762, 32766, 32767};
  int T976 [11] = '{5638, 15915, 23689, 28571, 31116, 32217, 32613, 32731, 32760,
                    32766, 32767};
  int T1344 [7] = '{9142, 23462, 30338, 32361, 32725, 32765, 32767};

  function automatic int ref_sample(level_e l, logic [15:0] r);
    int t = int'(r[15:1]);
    int e = 0;
    int len = (l == LVL_640) ? 13 : (l == LVL_976) ? 11 : 7;
    for (int z = 0; z < len - 1; z++) begin
      int tz = (l == LVL_640) ? T640[z] : (l == LVL_976) ? T976[z] : T1344[z];
      if (t > tz) e++;
    end
    return r[0] ? -e : e;
  endfunction

  task automatic one(logic [63:0] w, inout int maxabs);
    @(negedge clk); din = w; din_valid = 1;
    @(negedge clk); din_valid = 0;
    checks++;
    if (!dout_valid) begin failures++; $display("no valid after one clock"); end
    for (int k = 0; k < 4; k++) begin
      int r = ref_sample(level, w[16*k +: 16]);
      int a = r < 0 ? -r : r;
      if (a > maxabs) maxabs = a;
      checks++;
      if (dout[16*k +: 16] !== 16'(r)) begin
        failures++;
        $display("lvl %0d r=%h got %h exp %0d", level, w[16*k +: 16], dout[16*k +: 16], r);
      end
    end
  endtask

  initial begin
    din = '0; din_valid = 0; level = LVL_640;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      int maxabs;
      int len;
      maxabs = 0;
      level = level_e'(l);
      len = (l == 0) ? 13 : (l == 1) ? 11 : 7;
      for (int i = 0; i < 400; i++) one({$urandom, $urandom}, maxabs);
      for (int z = 0; z < len; z++) begin
        automatic int tz = (l == 0) ? T640[z] : (l == 1) ? T976[z] : T1344[z];
        one({16'(tz*2), 16'(tz*2+1), 16'((tz+1)*2), 16'((tz+1)*2+1)}, maxabs);
      end
      one(64'hFFFF_FFFE_FFFF_FFFE, maxabs);
      checks++;
      if (maxabs != len - 1) begin
        failures++;
        $display("level %0d largest magnitude %0d", l, maxabs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
