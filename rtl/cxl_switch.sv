// cxl_switch: the CXL switch's CN-to-CN message routing, with ReCXL's
// failure detection.
//
// Each CN has two lanes, each with a valid/ready input and output: the
// request lane (REPL) on port index n and the response lane (REPL_ACK, VAL)
// on port index NCN+n. A message goes to the output of its own lane at the CN
// named by its dst field; the lanes share nothing, so REPLs waiting for a busy
// Logging Unit never hold up responses (own choice, after CXL's separate
// message classes).
// Every output port has a round-robin arbiter over the inputs that address
// it and a one-message register, so the switch adds one cycle of latency and
// keeps ready paths between CNs registered. Messages addressed to a CN whose
// Viral_Status bit is set are absorbed and never answered, as ReCXL requires
// (the switch must not reply with poisoned data on behalf of a failed CN).
// The Viral_Status bits and the MSI to the Configuration Manager come from
// switch_fault_monitor.
//
// The paper does not design the switch's data path; this is the simplest
// router that delivers the messages. Coherence traffic to the memory nodes
// and MN ports are outside this block. Messages between one pair of ports
// stay in order here, which is stricter than the reordering fabric the paper
// allows for; the Logging Units do not depend on that order.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module cxl_switch
  import recxl_pkg::*;
#(
  parameter int unsigned NCN     = 16,
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [2*NCN-1:0] in_valid,     // [n]: request lane, [NCN+n]: response lane
  output logic [2*NCN-1:0] in_ready,
  input  msg_t             in_msg [2*NCN],
  output logic [2*NCN-1:0] out_valid,
  input  logic [2*NCN-1:0] out_ready,
  output msg_t             out_msg [2*NCN],
  input  logic [NCN-1:0] link_alive,
  output logic [NCN-1:0] viral_status,
  output logic           msi_valid,
  input  logic           msi_ready,
  output cn_id_t         msi_dst,
  output cn_id_t         msi_failed_cn,
  output logic           ev_drop
);

  localparam int unsigned IW = $clog2(NCN > 1 ? NCN : 2);
  localparam int unsigned NP = 2 * NCN;
  localparam int unsigned PW = $clog2(NP);

  switch_fault_monitor #(.NCN(NCN), .TIMEOUT(TIMEOUT)) u_mon (
    .clk, .rst_n, .link_alive, .viral_status,
    .msi_valid, .msi_ready, .msi_dst, .msi_failed_cn);

  logic [NP-1:0] drop;
  logic [NP-1:0] req    [NP];   // req[j][i]: input i wants output j
  logic [NP-1:0] gnt    [NP];
  logic [PW-1:0] gidx   [NP];
  logic [NP-1:0] slot_free;
  logic [NP-1:0] take;          // output j takes a message this cycle

  always_comb begin
    for (int i = 0; i < NP; i++)
      drop[i] = in_valid[i] && viral_status[in_msg[i].dst[IW-1:0]];
    for (int j = 0; j < NP; j++)
      for (int i = 0; i < NP; i++)
        req[j][i] = in_valid[i] && !drop[i] && ((i < NCN) == (j < NCN))
                    && (int'(in_msg[i].dst) == j % NCN);
  end

  for (genvar j = 0; j < NP; j++) begin : g_out
    assign slot_free[j] = !out_valid[j] || out_ready[j];
    assign take[j]      = (|req[j]) && slot_free[j];
    rr_arbiter #(.N(NP)) u_arb (
      .clk, .rst_n, .req(req[j]), .advance(take[j]), .gnt(gnt[j]), .gnt_idx(gidx[j]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[j] <= 1'b0;
        out_msg[j]   <= '0;
      end else if (slot_free[j]) begin
        out_valid[j] <= |req[j];
        if (|req[j]) out_msg[j] <= in_msg[gidx[j]];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      in_ready[i] = drop[i];
      for (int j = 0; j < NP; j++)
        if (gnt[j][i] && slot_free[j]) in_ready[i] = 1'b1;
    end
  end

  assign ev_drop = |drop;

  for (genvar i = 0; i < NP; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_valid[i] |-> int'(in_msg[i].dst) < NCN);
  end

endmodule
