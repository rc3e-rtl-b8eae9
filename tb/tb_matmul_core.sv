// tb_matmul_core: self-checking test of the matrix multiplication user core
// at its default size (16 x 16).
//  - while ucs[0] bit 0 (run) is clear the core takes no input;
//  - product 1: small integers, exact, with an uninterrupted stream, and the
//    time from first input word to last output word must be 4*N*N clocks;
//  - products 2 and 3: random floats, with random gaps on the input and
//    random back-pressure on the output, compared bit for bit with a
//    reference that rounds every multiply and every add to single precision
//    (one unit in the last place allowed, for double rounding in the bench);
//  - after each product the status byte ucs[0x80] must count it.
module tb_matmul_core;
  import tb_fp32_ref_pkg::*;
  localparam int unsigned N = 16;

  logic clk = 0, rst = 0;
  logic in_empty, in_rd, out_full = 0, out_wr, ucs_we;
  logic [31:0] in_data, out_data;
  logic [7:0] ucs_raddr, ucs_waddr, ucs_rdata = 0, ucs_wdata;
  logic [7:0] cmd = 0, status = 0;

  int checks = 0, failures = 0;
  logic [31:0] inq [$];
  logic [31:0] outq [$];
  bit in_gaps = 0, out_stalls = 0, gap;
  int t_first_in = -1, t_last_out = -1, cycle = 0;

  always #5 clk = ~clk;

  matmul_core #(.N(N), .UCS_AW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ucs model: one clock read latency, status write
  always @(posedge clk) begin
    ucs_rdata <= (ucs_raddr == 8'h00) ? cmd : 8'h00;
    if (ucs_we && ucs_waddr == 8'h80) status <= ucs_wdata;
  end

  // input stream model, first word fall through, optional gaps
  assign in_empty = (inq.size() == 0) || gap;
  assign in_data  = (inq.size() != 0) ? inq[0] : 32'd0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (in_rd) begin
      if (t_first_in < 0) t_first_in <= cycle;
      void'(inq.pop_front());
    end
    if (out_wr) begin
      outq.push_back(out_data);
      t_last_out <= cycle;
    end
  end
  always @(negedge clk) begin
    gap      <= in_gaps && ($urandom_range(3) == 0);
    out_full <= out_stalls && ($urandom_range(2) == 0);
  end

  function automatic bit close(input logic [31:0] x, input logic [31:0] y);
    int d;
    if (x == y) return 1;
    if (x[31] != y[31]) return 0;
    d = int'(x[30:0]) - int'(y[30:0]);
    return d == 1 || d == -1;
  endfunction

  task automatic run_product(input int kind, input int num);
    logic [31:0] a [N][N], b [N][N], c;
    t_first_in = -1;
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++) begin
        if (kind == 0) begin
          a[r][k] = real_to_f32(real'($urandom_range(16)) - 8.0);
          b[r][k] = real_to_f32(real'($urandom_range(16)) - 8.0);
        end else begin
          a[r][k] = rand_f32();
          b[r][k] = rand_f32();
        end
      end
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) inq.push_back(a[r][k]);
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) inq.push_back(b[r][k]);
    while (outq.size() < N * N) @(posedge clk);
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin
        c = 32'd0;
        for (int k = 0; k < N; k++) c = ref_add(c, ref_mul(a[r][k], b[k][j]));
        check(close(outq.pop_front(), c), $sformatf("product %0d C[%0d][%0d]", num, r, j));
      end
    repeat (3) @(posedge clk);
    check(status == 8'(num), $sformatf("status count %0d", status));
  endtask

  initial begin
    #1 rst = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    // not running: no input taken
    for (int k = 0; k < 8; k++) inq.push_back(32'h3F80_0000);
    repeat (20) @(posedge clk);
    check(inq.size() == 8, "no input while run is clear");
    inq.delete();
    @(negedge clk) cmd = 8'h01;
    repeat (2) @(posedge clk);
    run_product(0, 1);
    check(t_last_out - t_first_in == 4 * N * N - 1,
          $sformatf("product time %0d clocks, expected %0d", t_last_out - t_first_in + 1, 4 * N * N));
    in_gaps = 1; out_stalls = 1;
    run_product(1, 2);
    run_product(1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
