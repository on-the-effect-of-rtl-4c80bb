// repl_policy: the replacement policy of the randomized cache, chosen when
// the design is built.
//
// POLICY selects one of the four policies (rc_pkg::policy_e); each is a
// separate implementation with the same ports, so every build holds exactly
// one policy and its state RAMs, as in the per-policy area figures the design
// was evaluated with. The default is VARP with 64 ages. Ports and timing are
// those of the selected policy (see rp_rrp): victim valid the cycle after
// rd_en, upd_done after one (RRP, DRPLRU, VARP) or two (FRPLRU) cycles.
module repl_policy #(
  parameter rc_pkg::policy_e POLICY = rc_pkg::RP_VARP,
  parameter int unsigned W      = 4,
  parameter int unsigned SETS   = 1024,
  parameter int unsigned AGES   = 64
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              init_en,
  input  logic [$clog2(SETS)-1:0]           init_idx,
  input  logic                              rd_en,
  input  logic [W-1:0][$clog2(SETS)-1:0]    cand_idx,
  input  logic [W-1:0]                      cand_valid,
  output logic [$clog2(W)-1:0]              victim,
  output logic [W-1:0][7:0]                 cand_age,
  output logic                              tie,
  input  logic                              upd_en,
  input  logic [$clog2(W)-1:0]              upd_way,
  output logic                              upd_done
);

  if (POLICY == rc_pkg::RP_RRP) begin : g_rrp
    rp_rrp #(.W(W), .SETS(SETS)) u_rp (.*);
  end else if (POLICY == rc_pkg::RP_DRPLRU) begin : g_drplru
    rp_drplru #(.W(W), .SETS(SETS)) u_rp (.*);
  end else if (POLICY == rc_pkg::RP_FRPLRU) begin : g_frplru
    rp_frplru #(.W(W), .SETS(SETS)) u_rp (.*);
  end else begin : g_varp
    rp_varp #(.W(W), .SETS(SETS), .AGES(AGES)) u_rp (.*);
  end

endmodule
