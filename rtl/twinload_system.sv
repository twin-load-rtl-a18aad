// twinload_system: a multi-layer extended memory on one DDRx channel.
//
// The arrangement follows the paper's four-layer tree: the memory controller's
// channel can drive only two loads, so it carries N_MEC1 top-level MECs
// (MEC1s), one per logical rank (chip select). Below each MEC1 every MEC
// drives FANOUT children, for LAYERS layers in all counting the MEC1; the
// last layer are leaf MECs, each driving one dual-rank DIMM. With the defaults
// (2 MEC1s, 4 layers, fanout 2) there are 2+4+8+16 MECs and 32 ranks, as in
// the paper's topology figure.
//
// MEC1's master interface is a bus shared by its FANOUT children; each child
// accepts only the rank IDs in its routing table. Middle MECs forward per
// port. The DIMMs are outside this module: each leaf's DIMM bus is a port
// (dram_cmd, dram_wdata out; dram_rdata in, indexed by leaf number
// MEC1 * leaves-per-tree + leaf position; leaf k of a tree owns rank IDs 2k
// and 2k+1). The read data buses of the MEC1s are merged onto the
// controller's data bus; only the MEC1 addressed by cs drives it.
//
// Round trip from MEC1 to a DRAM and back is 2*LAYERS*T_PD_C + tRL cycles;
// twin-loads hide it as long as it fits in the row-miss gap between the two
// loads (tRTP + tRP + tRCD = 28 cycles = 35 ns) plus tRL.
module twinload_system
  import tl_pkg::*;
#(
  parameter int unsigned N_MEC1 = 2,
  parameter int unsigned LAYERS = 4,
  parameter int unsigned FANOUT = 2,
  parameter int unsigned M      = 16,
  parameter int unsigned T_PD_C = T_PD,
  localparam int unsigned NODES  = (ipow(FANOUT, LAYERS) - 1) / (FANOUT - 1),
  localparam int unsigned NLEAF  = ipow(FANOUT, LAYERS - 1),
  localparam int unsigned N_DIMM = N_MEC1 * NLEAF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tl_lf,
  // memory controller channel
  input  mc_cmd_t    mc_cmd,
  input  beat_t      mc_wdata,
  output beat_t      mc_rdata,
  // DIMM buses of the leaf MECs
  output dram_cmd_t  dram_cmd   [N_DIMM],
  output beat_t      dram_wdata [N_DIMM],
  input  beat_t      dram_rdata [N_DIMM],
  // MEC1 event pulses
  output mec1_ev_t   ev         [N_MEC1]
);
  localparam int unsigned PORT_W = (FANOUT > 1) ? $clog2(FANOUT) : 1;

  function automatic int unsigned level_first(int unsigned l);
    return (ipow(FANOUT, l) - 1) / (FANOUT - 1);
  endfunction
  function automatic int unsigned node_level(int unsigned n);
    int unsigned l = 0;
    while (l + 1 < LAYERS && n >= level_first(l + 1)) l++;
    return l;
  endfunction

  initial assert (2 * NLEAF <= (1 << RID_W) && FANOUT >= 2 && LAYERS >= 2)
    else $error("twinload_system: tree larger than the rank ID space");

  beat_t rdata_t [N_MEC1];

  for (genvar t = 0; t < N_MEC1; t++) begin : g_tree
    link_cmd_t cmd_in [NODES];   // command arriving at node n (n >= 1)
    beat_t     wd_in  [NODES];
    link_ret_t ret_up [NODES];   // return leaving node n towards its parent
    link_ret_t mec1_ret;

    assign cmd_in[0] = '0;
    assign wd_in[0]  = '0;
    assign ret_up[0] = '0;

    mec1 #(.M(M), .CS_ID(1'(t)), .T_PD_C(T_PD_C)) u_mec1 (
      .clk, .rst_n, .tl_lf,
      .mc_cmd, .mc_wdata, .mc_rdata(rdata_t[t]),
      .dn_cmd  (cmd_in[1]),
      .dn_wdata(wd_in[1]),
      .up_ret  (mec1_ret),
      .ev      (ev[t])
    );
    // MEC1's master bus is shared by its FANOUT children
    for (genvar p = 2; p <= FANOUT; p++) begin : g_bus
      assign cmd_in[p] = cmd_in[1];
      assign wd_in[p]  = wd_in[1];
    end
    always_comb begin
      mec1_ret = '0;
      for (int p = 1; p <= FANOUT; p++) if (ret_up[p].valid) mec1_ret = ret_up[p];
    end

    for (genvar n = 1; n < NODES; n++) begin : g_node
      localparam int unsigned L    = node_level(n);
      localparam int unsigned POS  = n - level_first(L);
      localparam int unsigned SPAN = 2 * ipow(FANOUT, LAYERS - 1 - L);  // rank IDs below
      if (L < LAYERS - 1) begin : g_mid
        link_cmd_t dc [FANOUT];
        beat_t     dw [FANOUT];
        link_ret_t dr [FANOUT];
        for (genvar p = 0; p < FANOUT; p++) begin : g_c
          assign cmd_in[n*FANOUT + 1 + p] = dc[p];
          assign wd_in[n*FANOUT + 1 + p]  = dw[p];
          assign dr[p] = ret_up[n*FANOUT + 1 + p];
        end
        mec_mid #(.FANOUT(FANOUT), .BASE(POS * SPAN), .SPAN(SPAN / FANOUT),
                  .T_PD_C(T_PD_C)) u_mid (
          .clk, .rst_n,
          .up_cmd(cmd_in[n]), .up_wdata(wd_in[n]), .up_ret(ret_up[n]),
          .dn_cmd(dc), .dn_wdata(dw), .dn_ret(dr),
          .cfg_we(1'b0), .cfg_id('0), .cfg_valid(1'b0), .cfg_port(PORT_W'(0))
        );
      end else begin : g_leaf
        mec_leaf #(.RID_BASE(2 * POS), .T_PD_C(T_PD_C)) u_leaf (
          .clk, .rst_n,
          .up_cmd(cmd_in[n]), .up_wdata(wd_in[n]), .up_ret(ret_up[n]),
          .dram_cmd  (dram_cmd[t*NLEAF + POS]),
          .dram_wdata(dram_wdata[t*NLEAF + POS]),
          .dram_rdata(dram_rdata[t*NLEAF + POS])
        );
      end
    end
  end

  always_comb begin
    mc_rdata = '0;
    for (int t = 0; t < N_MEC1; t++) if (rdata_t[t].valid) mc_rdata = rdata_t[t];
  end
endmodule
