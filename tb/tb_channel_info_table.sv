// tb_channel_info_table: random bit writes to random layers, compared with
// a reference array through both read ports; reset must clear all to dense.
module tb_channel_info_table;
  localparam int NL = 9, NC = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, wtype = 0, btype;
  logic [$clog2(NL)-1:0] wlayer = '0, rlayer = '0, blayer = '0;
  logic [$clog2(NC)-1:0] wch = '0, bch = '0;
  logic [NC-1:0] rtypes;
  int checks = 0, failures = 0;
  logic [NC-1:0] ref_t [NL];

  channel_info_table #(.N_LAYERS(NL), .N_CH(NC)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) ref_t[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      @(negedge clk); rlayer = 4'(l); #1;
      checks++; if (rtypes != '0) failures++;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = 1; wlayer = 4'($urandom_range(0, NL - 1)); wch = 6'($urandom_range(0, NC - 1));
      wtype = 1'($urandom());
      ref_t[wlayer][wch] = wtype;
      @(negedge clk); we = 0;
      rlayer = 4'($urandom_range(0, NL - 1));
      blayer = 4'($urandom_range(0, NL - 1)); bch = 6'($urandom_range(0, NC - 1));
      #1;
      checks += 2;
      if (rtypes != ref_t[rlayer]) failures++;
      if (btype != ref_t[blayer][bch]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
