// tb_cxl_switch: random traffic through the switch, checked against
// per-path queues kept here.
//
// Four CNs (eight ports: request lanes 0..3, response lanes 4..7), a 30-cycle
// failure timeout. Every port offers random messages to random CNs and holds
// each until taken; every output takes at random. Checks: a message leaves
// on the output of its own lane at the CN it names, unchanged, in order with
// the other messages of the same input and output, exactly once; after CN 3
// goes quiet its Viral_Status bit rises and from then on messages to it are
// absorbed (ev_drop) and never delivered; its MSI goes to CN 0.
//
// Interface and timing: 2*NCN valid/ready input and output lanes with random
// back-pressure. From the paper: failure detection and no answers on behalf of
// a failed CN. Own choices: the crossbar, the two lanes per CN, per-output
// round-robin and dropping messages to a failed CN.
module tb_cxl_switch;
  import recxl_pkg::*;
  localparam int unsigned NCN = 4, TO = 30, NP = 2 * NCN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  msg_t in_msg [NP];
  msg_t out_msg [NP];
  logic [NCN-1:0] link_alive, viral_status;
  logic msi_valid, msi_ready;
  cn_id_t msi_dst, msi_failed_cn;
  logic ev_drop;

  cxl_switch #(.NCN(NCN), .TIMEOUT(TO)) dut (.*);

  int checks = 0, failures = 0, n_sent = 0, n_recv = 0, n_drop = 0, n_msi = 0, n_ev_drop = 0;
  int seq = 0;
  msg_t q [NP][NP][$];      // [input][output]
  logic [NP-1:0] acc;
  logic stim = 1;

  always @(negedge clk) if (rst_n && stim) begin
    for (int i = 0; i < NP; i++) begin
      if (!in_valid[i] || acc[i]) begin
        if ($urandom_range(0, 99) < 40) begin
          msg_t m;
          m = '0;
          m.mtype = (i < NCN) ? MSG_REPL : (($urandom_range(0, 1) == 0) ? MSG_VAL : MSG_REPL_ACK);
          m.src = cn_id_t'(i % NCN);
          m.dst = cn_id_t'($urandom_range(0, NCN - 1));
          m.line = line_addr_t'($urandom());
          m.data[0] = seq++;
          in_msg[i] = m;
          in_valid[i] = 1'b1;
        end else in_valid[i] = 1'b0;
      end
      out_ready[i] = $urandom_range(0, 99) < 70;
    end
    msi_ready = $urandom_range(0, 1);
    acc = '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_drop) n_ev_drop++;
    for (int j = 0; j < NP; j++) if (out_valid[j] && out_ready[j]) begin
      bit found;
      found = 0;
      n_recv++;
      checks++;
      for (int i = 0; i < NP; i++)
        if (!found && q[i][j].size() != 0 && q[i][j][0] == out_msg[j]) begin
          found = 1; void'(q[i][j].pop_front());
        end
      if (!found) begin failures++; $display("%0t FAIL output %0d: unexpected message", $time, j); end
    end
    for (int i = 0; i < NP; i++) if (in_valid[i] && in_ready[i]) begin
      int j;
      acc[i] = 1'b1;
      j = (i < NCN ? 0 : NCN) + int'(in_msg[i].dst);
      if (viral_status[in_msg[i].dst]) begin
        n_drop++;
        checks++;
        if (!ev_drop) begin failures++; $display("%0t FAIL drop not flagged", $time); end
      end else begin
        q[i][j].push_back(in_msg[i]);
        n_sent++;
      end
    end
    if (msi_valid && msi_ready) begin
      n_msi++;
      checks++;
      if (msi_dst != 0 || msi_failed_cn != 3) begin failures++; $display("FAIL MSI fields"); end
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; out_ready = '0; acc = '0; msi_ready = 0;
    link_alive = '1;
    for (int i = 0; i < NP; i++) in_msg[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5000) @(posedge clk);
    @(negedge clk) link_alive[3] = 1'b0;
    repeat (TO + 3) @(posedge clk);
    checks++; if (viral_status != 4'b1000) begin failures++; $display("FAIL viral %b", viral_status); end
    repeat (5000) @(posedge clk);
    // drain
    @(negedge clk);
    stim = 0;
    out_ready = '1;
    while (in_valid != 0) begin
      @(negedge clk);
      for (int i = 0; i < NP; i++) if (acc[i]) in_valid[i] = 1'b0;
      acc = '0;
    end
    out_ready = '1;
    repeat (50) @(posedge clk);
    for (int i = 0; i < NP; i++) for (int j = 0; j < NP; j++) begin
      // messages queued to CN 3 before it failed may be lost with it
      if (j % NCN != 3) begin
        checks++;
        if (q[i][j].size() != 0) begin failures++; $display("FAIL %0d messages %0d->%0d never delivered", q[i][j].size(), i, j); end
      end
    end
    checks++; if (n_drop == 0 || n_msi != 1 || n_ev_drop == 0) begin failures++; $display("FAIL drops=%0d msi=%0d", n_drop, n_msi); end
    $display("sent=%0d received=%0d dropped=%0d", n_sent, n_recv, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
