// fp_add_pipe -- pipelined single-precision floating-point adder of one PE.
//
// The sum is formed in one combinational stage (sfs_pkg::fp_add: align,
// add/subtract, normalise, round to nearest even) and then delayed by LAT-1
// register stages, so a result and its tag leave LAT cycles after the
// operands enter. A new operation can enter every cycle. Register retiming in
// synthesis is expected to spread the logic over the stages.
//
// Interface: in_valid/a/b/tag_in -> out_valid/sum/tag_out. Timing: LAT cycles
// latency, throughput one per cycle, no backpressure.
//
// From the source design: 32-bit float addition taking 11 clocks (LAT=11).
// Own choice: denormals flushed to zero, the tag that travels with the sum.
module fp_add_pipe
  import sfs_pkg::*;
#(
  parameter int unsigned LAT   = 11,
  parameter int unsigned TAG_W = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            a,
  input  fp32_t            b,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fp32_t            sum,
  output logic [TAG_W-1:0] tag_out
);
  logic             v_q [LAT];
  fp32_t            s_q [LAT];
  logic [TAG_W-1:0] t_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        v_q[i] <= 1'b0;
        s_q[i] <= '0;
        t_q[i] <= '0;
      end
    end else begin
      v_q[0] <= in_valid;
      s_q[0] <= fp_add(a, b);
      t_q[0] <= tag_in;
      for (int i = 1; i < LAT; i++) begin
        v_q[i] <= v_q[i-1];
        s_q[i] <= s_q[i-1];
        t_q[i] <= t_q[i-1];
      end
    end
  end

  assign out_valid = v_q[LAT-1];
  assign sum       = s_q[LAT-1];
  assign tag_out   = t_q[LAT-1];
endmodule
