// pim_logic_layer: the sequence-alignment additions to the logic layer of a
// 3D-stacked memory (HMC-like): one vault_pim_unit (AGU + PE + queues +
// arbiter) in front of each of the NUM_VAULTS vault controllers.
//
// The host programs every vault with a PIM packet (the same query is written
// into each vault beforehand) and all vaults align the query with their own
// share of the reference database at the same time; each vault reports its
// best score and the index of the reference that gave it. The host reads the
// NUM_VAULTS local maxima and takes the global maximum itself.
// The packet switch that directs host packets to a vault, the vault
// controllers with their DRAM, and the serial links to the host are parts of
// the memory cube itself, not of this design: their sides of the
// connections are this module's ports, one array element per vault.
// Timing: each vault works independently; see vault_pim_unit.
//
// From the paper: 32 vaults, one PE of 16 functional units per vault
// (480 functional units in total are rounded to 16 per vault). The
// flattening into per-vault ports is this design's choice.
module pim_logic_layer
  import nw_pkg::*;
#(
  parameter int unsigned NUM_VAULTS = 32,
  parameter int unsigned P          = 16,
  parameter int unsigned PIMQ_D     = 4,    // queue depths (see vault_pim_unit)
  parameter int unsigned MEMQ_D     = 8,
  parameter int unsigned ADRQ_D     = 8,
  parameter int unsigned STQ_D      = 8,
  parameter int unsigned LDQ_D      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the packet switch, per vault
  input  pim_packet_t pim_pkt     [NUM_VAULTS],
  input  logic        pim_valid   [NUM_VAULTS],
  output logic        pim_ready   [NUM_VAULTS],
  input  mem_req_t    mem_req     [NUM_VAULTS],
  input  logic        mem_valid   [NUM_VAULTS],
  output logic        mem_ready   [NUM_VAULTS],
  output word_t       host_rdata  [NUM_VAULTS],
  output logic        host_rvalid [NUM_VAULTS],
  // to the vault controllers
  output mem_req_t    mc_req      [NUM_VAULTS],
  output logic        mc_valid    [NUM_VAULTS],
  input  logic        mc_ready    [NUM_VAULTS],
  input  word_t       mc_rdata    [NUM_VAULTS],
  input  logic        mc_rvalid   [NUM_VAULTS],
  // per-vault results
  output logic        run_done     [NUM_VAULTS],
  output logic        result_valid [NUM_VAULTS],
  output score_t      local_max    [NUM_VAULTS],
  output len_t        local_max_idx[NUM_VAULTS],
  output logic        busy         [NUM_VAULTS]
);
  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    vault_pim_unit #(
      .P(P), .PIMQ_D(PIMQ_D), .MEMQ_D(MEMQ_D), .ADRQ_D(ADRQ_D), .STQ_D(STQ_D), .LDQ_D(LDQ_D)
    ) u_vault (
      .clk, .rst_n,
      .pim_pkt(pim_pkt[v]), .pim_valid(pim_valid[v]), .pim_ready(pim_ready[v]),
      .mem_req(mem_req[v]), .mem_valid(mem_valid[v]), .mem_ready(mem_ready[v]),
      .host_rdata(host_rdata[v]), .host_rvalid(host_rvalid[v]),
      .mc_req(mc_req[v]), .mc_valid(mc_valid[v]), .mc_ready(mc_ready[v]),
      .mc_rdata(mc_rdata[v]), .mc_rvalid(mc_rvalid[v]),
      .run_done(run_done[v]), .result_valid(result_valid[v]),
      .local_max(local_max[v]), .local_max_idx(local_max_idx[v]), .busy(busy[v])
    );
  end
endmodule
