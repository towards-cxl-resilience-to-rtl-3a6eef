// switch_fault_monitor: CN failure detection in the CXL switch.
//
// The switch holds one Viral_Status bit per connected CN. The CXL link layer
// keeps exchanging flits (data, credit returns or idle flits) with a live
// port; link_alive[i] is high in every cycle in which port i showed such link
// activity. If a CN shows none for TIMEOUT consecutive cycles it is taken as
// unresponsive (fail-stop model) and its Viral_Status bit is set; the bit is
// sticky until reset. The switch never answers on behalf of a failed CN:
// messages addressed to it are absorbed without a reply (the switch uses
// viral_status for that).
//
// For each newly failed CN, the monitor sends one Message Signaled Interrupt
// to the lowest-numbered live CN (msi_* is a valid/ready port carrying the
// destination CN and the failed CN); that CN's receiving core acts as the
// Configuration Manager of the recovery. Pending MSIs are sent one at a time,
// lowest failed CN first.
//
// The paper says the switch detects an unresponsive CN but not how; the
// activity timeout, its length and the choice of the MSI target are this
// design's.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module switch_fault_monitor
  import recxl_pkg::*;
#(
  parameter int unsigned NCN     = 16,
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCN-1:0] link_alive,
  output logic [NCN-1:0] viral_status,
  output logic           msi_valid,
  input  logic           msi_ready,
  output cn_id_t         msi_dst,
  output cn_id_t         msi_failed_cn
);

  localparam int unsigned TW = $clog2(TIMEOUT + 1);

  logic [TW-1:0]  quiet_q [NCN];
  logic [NCN-1:0] pend_q;

  logic           any_live, any_pend;
  cn_id_t         live_idx, pend_idx;
  always_comb begin
    any_live = 1'b0; live_idx = '0;
    any_pend = 1'b0; pend_idx = '0;
    for (int i = NCN - 1; i >= 0; i--) begin
      if (!viral_status[i]) begin any_live = 1'b1; live_idx = cn_id_t'(i); end
      if (pend_q[i])        begin any_pend = 1'b1; pend_idx = cn_id_t'(i); end
    end
  end

  assign msi_valid     = any_pend && any_live;
  assign msi_dst       = live_idx;
  assign msi_failed_cn = pend_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      viral_status <= '0;
      pend_q       <= '0;
      for (int i = 0; i < NCN; i++) quiet_q[i] <= '0;
    end else begin
      for (int i = 0; i < NCN; i++) begin
        if (link_alive[i] || viral_status[i]) begin
          quiet_q[i] <= '0;
        end else if (quiet_q[i] == TW'(TIMEOUT - 1)) begin
          viral_status[i] <= 1'b1;
          pend_q[i]       <= 1'b1;
          quiet_q[i]      <= '0;
        end else begin
          quiet_q[i] <= quiet_q[i] + 1'b1;
        end
      end
      if (msi_valid && msi_ready) pend_q[pend_idx[$clog2(NCN)-1:0]] <= 1'b0;
    end
  end

  // a failed CN stays failed
  assert property (@(posedge clk) disable iff (!rst_n)
                   ($past(viral_status) & ~viral_status) == '0);

endmodule
