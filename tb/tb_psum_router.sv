// tb_psum_router: a chain of three routers fed with one row per cycle; the
// tail output must be the sum of the three local rows of the same index,
// arriving three cycles after the head input, with valid and row index.
module tb_psum_router;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 3;
  logic pp_valid = 0;
  logic [HW-1:0] pp_row = '0;
  logic [N:0] v;
  logic [N:0][HW-1:0] row;
  logic signed [N:0][W_MAX-1:0][ACC_W-1:0] ps;
  logic signed [W_MAX-1:0][ACC_W-1:0] loc [N][H_MAX];
  int checks = 0, failures = 0;

  assign v[0] = 1'b0;
  assign row[0] = '0;
  assign ps[0] = '0;

  for (genvar i = 0; i < N; i++) begin : g
    logic [HW-1:0] rr;
    assign rr = (i == 0) ? pp_row : row[i];
    psum_router u (
      .clk, .rst_n, .head(i == 0),
      .in_valid(v[i]), .in_row(row[i]), .in_psum(ps[i]),
      .loc_valid(pp_valid), .loc_row(pp_row), .loc_psum(loc[i][rr]),
      .out_valid(v[i+1]), .out_row(row[i+1]), .out_psum(ps[i+1])
    );
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0;
  always @(posedge clk) if (rst_n && v[N]) begin
    checks += 2;
    if (row[N] != HW'(got)) failures++;
    for (int c = 0; c < W_MAX; c++)
      if (ps[N][c] != loc[0][got][c] + loc[1][got][c] + loc[2][got][c]) begin failures++; break; end
    got++;
  end

  initial begin
    for (int i = 0; i < N; i++) for (int rr = 0; rr < H_MAX; rr++) for (int c = 0; c < W_MAX; c++)
      loc[i][rr][c] = ACC_W'($urandom());
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rr = 0; rr < 20; rr++) begin
      @(negedge clk); pp_valid = 1; pp_row = HW'(rr);
    end
    @(negedge clk); pp_valid = 0;
    // latency: a single row appears after exactly N cycles
    repeat (5) @(negedge clk);
    got = 30;
    pp_valid = 1; pp_row = HW'(30);
    @(negedge clk); pp_valid = 0;
    repeat (N - 1) @(negedge clk);
    checks++; if (!v[N]) failures++;
    @(negedge clk);
    checks++; if (v[N]) failures++;
    checks++; if (got != 31) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
