// tb_global_buffer: writes random activation and weight words, reads them
// back through every read port and checks data and the one-cycle read
// latency (data appears at the clock edge after the address, old data is
// returned for a simultaneous write to the same word).
module tb_global_buffer;
  import sqdm_pkg::*;
  localparam int NRD = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NRD-1:0] a_re = '0, w_re = '0;
  logic [NRD-1:0][AAW-1:0] a_raddr = '0;
  logic [NRD-1:0][WAW-1:0] w_raddr = '0;
  act_word_t [NRD-1:0] a_rdata;
  logic [NRD-1:0][WT_WORD_W-1:0] w_rdata;
  logic a_we = 0, w_we = 0;
  logic [AAW-1:0] a_waddr = '0;
  logic [WAW-1:0] w_waddr = '0;
  act_word_t a_wdata = '0;
  logic [WT_WORD_W-1:0] w_wdata = '0;
  int checks = 0, failures = 0;

  global_buffer #(.N_RD(NRD)) dut (.*);

  act_word_t            ref_a [int];
  logic [WT_WORD_W-1:0] ref_w [int];

  function automatic act_word_t rnd_act();
    act_word_t v;
    for (int i = 0; i < $bits(v) / 32 + 1; i++) v = {v, $urandom()};
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs[$];
    for (int n = 0; n < 40; n++) begin
      int a;
      a = (n < 2) ? (n == 0 ? 0 : ACT_DEPTH - 1) : int'($urandom_range(0, ACT_DEPTH - 1));
      addrs.push_back(a);
      @(negedge clk);
      a_we = 1; a_waddr = AAW'(a); a_wdata = rnd_act(); ref_a[a] = a_wdata;
      w_we = 1; w_waddr = WAW'(a * 2); w_wdata = {$urandom(), $urandom(), $urandom()}; ref_w[a*2] = w_wdata;
    end
    @(negedge clk); a_we = 0; w_we = 0;
    foreach (addrs[n]) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        a_re[p] = 1; a_raddr[p] = AAW'(addrs[(n + p) % addrs.size()]);
        w_re[p] = 1; w_raddr[p] = WAW'(2 * addrs[(n + p) % addrs.size()]);
      end
      @(posedge clk); #1;
      for (int p = 0; p < NRD; p++) begin
        checks += 2;
        if (a_rdata[p] != ref_a[addrs[(n + p) % addrs.size()]]) failures++;
        if (w_rdata[p] != ref_w[2 * addrs[(n + p) % addrs.size()]]) failures++;
      end
    end
    // read-during-write returns old data
    @(negedge clk);
    a_re = '0; a_re[0] = 1; a_raddr[0] = AAW'(addrs[5]);
    a_we = 1; a_waddr = AAW'(addrs[5]); a_wdata = ~ref_a[addrs[5]];
    @(posedge clk); #1;
    checks++; if (a_rdata[0] != ref_a[addrs[5]]) failures++;
    @(negedge clk); a_we = 0;
    @(posedge clk); #1;
    checks++; if (a_rdata[0] != ~ref_a[addrs[5]]) failures++;
    // hold: no read enable keeps the output
    @(negedge clk); a_re = '0; a_raddr[0] = AAW'(addrs[6]);
    @(posedge clk); #1;
    checks++; if (a_rdata[0] != ~ref_a[addrs[5]]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
