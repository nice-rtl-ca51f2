// tb_param_mem: self-checking test of the parameter store.
// Every weight word, bias and layer record is written with random data and
// read back in random order; bias reads return LANES consecutive entries
// and zeros past the end of the array.
module tb_param_mem;
  import nice_pkg::*;

  localparam int unsigned LANES = 4, WDEPTH = 40, NL = 3;
  localparam int unsigned WA = $clog2(WDEPTH), BDEPTH = NL * C_ALL, BA = $clog2(BDEPTH), LA = $clog2(NL);

  logic clk = 0;
  logic wt_we, bias_we, cfg_we;
  logic [WA-1:0] wt_addr, wt_raddr;
  logic [LANES-1:0][KK-1:0][B_W-1:0] wt_data, wt_rdata;
  logic [BA-1:0] bias_addr, bias_raddr;
  logic [B_B-1:0] bias_data;
  logic [LANES-1:0][B_B-1:0] bias_rdata;
  logic [LA-1:0] cfg_addr, cfg_raddr;
  layer_cfg_t cfg_data, cfg_rdata;
  int checks = 0, failures = 0;

  param_mem #(.LANES(LANES), .WDEPTH(WDEPTH), .NL(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LANES*KK*B_W-1:0] wt_s [WDEPTH];
  int bias_s [BDEPTH];
  layer_cfg_t cfg_s [NL];

  initial begin
    wt_we = 0; bias_we = 0; cfg_we = 0; wt_addr = 0; bias_addr = 0; cfg_addr = 0;
    wt_data = '0; bias_data = 0; cfg_data = '0; wt_raddr = 0; bias_raddr = 0; cfg_raddr = 0;
    for (int a = 0; a < int'(BDEPTH); a++) begin
      @(negedge clk);
      bias_we = 1; bias_addr = BA'(a); bias_data = 16'($urandom); bias_s[a] = int'(bias_data);
      wt_we = (a < int'(WDEPTH)); wt_addr = WA'(a % WDEPTH);
      wt_data = {$urandom, $urandom, $urandom, $urandom, $urandom};
      if (a < int'(WDEPTH)) wt_s[a] = wt_data;
      cfg_we = (a < int'(NL)); cfg_addr = LA'(a % NL);
      cfg_data = layer_cfg_t'({$urandom, $urandom, $urandom});
      if (a < int'(NL)) cfg_s[a] = cfg_data;
    end
    @(negedge clk); bias_we = 0; wt_we = 0; cfg_we = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      wt_raddr = WA'($urandom_range(0, WDEPTH - 1));
      bias_raddr = BA'($urandom_range(0, BDEPTH - 1));
      cfg_raddr = LA'($urandom_range(0, NL - 1));
      #1;
      checks++;
      if (wt_rdata != wt_s[wt_raddr]) begin failures++; $display("FAIL weight %0d", wt_raddr); end
      checks++;
      if (cfg_rdata != cfg_s[cfg_raddr]) begin failures++; $display("FAIL cfg %0d", cfg_raddr); end
      for (int l = 0; l < int'(LANES); l++) begin
        int a, e;
        a = int'(bias_raddr) + l;
        e = (a < int'(BDEPTH)) ? bias_s[a] : 0;
        checks++;
        if (int'(bias_rdata[l]) != e) begin failures++; $display("FAIL bias %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
