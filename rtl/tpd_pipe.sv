// tpd_pipe: fixed propagation delay of DEPTH register stages for any bundle
// type. It models the per-hop delay a MEC adds to commands, write data and
// returned data (3.4 ns per direction for simple re-driving, rounded to three
// cycles at DDR3-1600). Output at cycle t+DEPTH equals the input at cycle t;
// every stage resets to all zeros (a NOP / invalid beat).
module tpd_pipe #(
  parameter type         T     = logic,
  parameter int unsigned DEPTH = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  T     d,
  output T     q
);
  T stage_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) stage_q[i] <= '0;
    end else begin
      stage_q[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage_q[i] <= stage_q[i-1];
    end
  end

  assign q = stage_q[DEPTH-1];

  initial assert (DEPTH >= 1) else $error("tpd_pipe: DEPTH must be at least 1");
endmodule
