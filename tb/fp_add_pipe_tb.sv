// fp_add_pipe_tb -- random single-precision additions against a double
// reference rounded to single (exact whenever the exponents differ by at
// most 29, which the stimulus keeps to), special values, back-to-back
// issue, and the LAT-cycle latency of every result and its tag.
module fp_add_pipe_tb;
  import tb_fp_pkg::*;
  localparam int LAT = 11;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a, b, sum;
  logic [8:0]  tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q [$];
  int          tcyc_q [$];
  logic [8:0]  tag_q [$];
  logic [31:0] exp_in;

  fp_add_pipe #(.LAT(LAT), .TAG_W(9)) dut (.clk, .rst_n, .in_valid, .a, .b, .tag_in,
                                          .out_valid, .sum, .tag_out);
  always #50 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record each operation as the adder samples it
  always @(posedge clk) if (rst_n && in_valid) begin
    exp_q.push_back(exp_in); tcyc_q.push_back(cyc); tag_q.push_back(tag_in);
  end

  logic [31:0] e; int t; logic [8:0] tg;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected result");
    end else begin
      e = exp_q.pop_front(); t = tcyc_q.pop_front(); tg = tag_q.pop_front();
      if (sum !== e || tag_out !== tg || cyc - t != LAT) begin
        failures++;
        $display("FAIL sum %h exp %h tag %0d/%0d latency %0d", sum, e, tag_out, tg, cyc - t);
      end
    end
  end

  task automatic issue(logic [31:0] x, logic [31:0] y, logic [31:0] e);
    @(negedge clk);
    a = x; b = y; in_valid = 1; tag_in = 9'($urandom); exp_in = e;
  endtask

  function automatic logic [31:0] rnd_norm(int emin, int emax);
    return {1'($urandom), 8'($urandom_range(emin, emax)), 23'($urandom)};
  endfunction

  initial begin
    a = 0; b = 0; tag_in = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, y; int ex;
      ex = int'($urandom_range(60, 190));
      x = rnd_norm(ex, ex);
      y = rnd_norm(ex - int'($urandom_range(0, 29)), ex);
      if (i % 7 == 0) y = {~x[31], x[30:0]} ^ 32'(i % 3);   // near cancellation
      issue(x, y, r2f(f2r(x) + f2r(y)));
    end
    // specials
    issue(32'h3F80_0000, 32'h0000_0000, 32'h3F80_0000);
    issue(32'h4000_0000, 32'hC000_0000, 32'h0000_0000);
    issue(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);
    issue(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);
    issue(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);
    issue(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);   // 1 + 2^-24: tie, round to even
    issue(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);   // tie, round up to even
    issue(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);   // 2^24 + 1
    issue(32'h3F80_0000, 32'h2000_0000, 32'h3F80_0000);   // far apart, sticky only
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin
      failures++; $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
