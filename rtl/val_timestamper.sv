// val_timestamper: logical timestamps for VAL messages, in the CXL port of a
// compute node.
//
// The fabric may reorder two VALs that a CN sends to the same replica, but the
// replica must move the validated log entries into its DRAM log in the order
// in which the stores committed. The CN therefore keeps one running counter per
// destination CN. When a VAL leaves, the counter of its destination is
// incremented and the new value is written into the VAL's Logical TS field
// (7 bits, wrapping). REPL and REPL_ACK messages pass unchanged.
//
// The block sits on a valid/ready message stream and adds no latency: out_* is
// in_* with the ts field replaced, and in_ready = out_ready. The counters
// advance only when a VAL is actually taken. All counters reset to 0, so the
// first VAL to each destination carries TS 1 (own choice; replicas start by
// expecting 1).
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module val_timestamper
  import recxl_pkg::*;
#(
  parameter int unsigned NCN = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  msg_t   in_msg,
  output logic   out_valid,
  input  logic   out_ready,
  output msg_t   out_msg
);

  ts_t ts_q [NCN];
  ts_t next_ts;

  assign next_ts   = ts_q[in_msg.dst[$clog2(NCN)-1:0]] + 1'b1;
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_comb begin
    out_msg = in_msg;
    if (in_msg.mtype == MSG_VAL) out_msg.ts = next_ts;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCN; i++) ts_q[i] <= '0;
    end else if (in_valid && out_ready && in_msg.mtype == MSG_VAL) begin
      ts_q[in_msg.dst[$clog2(NCN)-1:0]] <= next_ts;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> (int'(in_msg.dst) < NCN));

endmodule
