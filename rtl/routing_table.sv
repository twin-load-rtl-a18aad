// routing_table: DIMM-ID to port table of a lower MEC.
// The paper: middle MECs "use the high bits of the row address as the
// physical DIMM ID for command forwarding. The routing table determines the
// forwarding port." This is that table: one entry per rank ID, holding a
// valid bit and the child port. Its reset contents describe a regular tree:
// the IDs BASE .. BASE+FANOUT*SPAN-1 belong to this MEC, SPAN consecutive IDs
// per port; every other ID is marked not routable. A configuration port can
// rewrite any entry (for irregular trees); the paper does not say how the
// table is filled, so both the reset contents and the port are this design's
// choice. Lookup is combinational; a write is visible from the next cycle.
module routing_table
  import tl_pkg::*;
#(
  parameter int unsigned FANOUT = 2,
  parameter int unsigned BASE   = 0,
  parameter int unsigned SPAN   = 1,
  localparam int unsigned PORT_W = (FANOUT > 1) ? $clog2(FANOUT) : 1,
  localparam int unsigned N_ID   = 1 << RID_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RID_W-1:0]  id,
  output logic              hit,
  output logic [PORT_W-1:0] port,
  // configuration
  input  logic              cfg_we,
  input  logic [RID_W-1:0]  cfg_id,
  input  logic              cfg_valid,
  input  logic [PORT_W-1:0] cfg_port
);
  logic              valid_q [N_ID];
  logic [PORT_W-1:0] port_q  [N_ID];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ID; i++) begin
        valid_q[i] <= (i >= int'(BASE)) && (i < BASE + FANOUT*SPAN);
        port_q[i]  <= (i >= int'(BASE)) ? PORT_W'((i - int'(BASE)) / SPAN) : '0;
      end
    end else if (cfg_we) begin
      valid_q[cfg_id] <= cfg_valid;
      port_q[cfg_id]  <= cfg_port;
    end
  end

  assign hit  = valid_q[id];
  assign port = port_q[id];
endmodule
