// tb_switch_fault_monitor: checks failure detection and the MSI against a
// cycle-level model kept here.
//
// Eight CNs, a 20-cycle timeout. Live CNs show link activity with random
// gaps of up to TIMEOUT-1 quiet cycles (gaps of exactly TIMEOUT-1 are forced
// now and then: they must not count as a failure); from time to time a CN
// stops for good. Every cycle the Viral_Status bits must equal the model
// (set after TIMEOUT quiet cycles, never cleared) and the MSI port must offer
// the lowest-numbered not yet reported failed CN to the lowest-numbered live
// CN; msi_ready is random. At the end every failure must have been reported
// exactly once.
//
// Interface and timing: one link_alive bit per CN each cycle; the MSI is
// valid/ready. From the paper: a Viral_Status bit and an MSI to a live CN for
// an unresponsive CN. Own choices: the timeout count, the lowest live CN as
// target, and sticky bits.
module tb_switch_fault_monitor;
  import recxl_pkg::*;
  localparam int unsigned NCN = 8, TO = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NCN-1:0] link_alive, viral_status;
  logic msi_valid, msi_ready;
  cn_id_t msi_dst, msi_failed_cn;

  switch_fault_monitor #(.NCN(NCN), .TIMEOUT(TO)) dut (.*);

  int checks = 0, failures = 0, n_fail = 0, n_msi = 0, n_long_gap = 0;
  int quiet [NCN];
  int gap_left [NCN];
  logic [NCN-1:0] dead = '0, vm = '0, pm = '0;
  int reported [NCN];

  // stimulus at negedge
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < NCN; i++) begin
      if (!dead[i] && i != 0 && $urandom_range(0, 2999) == 0 && n_fail < NCN - 2) begin
        dead[i] = 1'b1; n_fail++;
      end
      if (dead[i]) link_alive[i] = 1'b0;
      else if (gap_left[i] > 0) begin link_alive[i] = 1'b0; gap_left[i]--; end
      else begin
        link_alive[i] = 1'b1;
        if ($urandom_range(0, 9) == 0) begin
          gap_left[i] = ($urandom_range(0, 3) == 0) ? TO - 1 : $urandom_range(1, TO - 1);
          if (gap_left[i] == TO - 1) n_long_gap++;
        end
      end
    end
    msi_ready = $urandom_range(0, 2) == 0;
  end

  // model and checks at posedge
  always @(posedge clk) if (rst_n) begin
    int lo_live, lo_pend;
    lo_live = -1; lo_pend = -1;
    for (int i = NCN - 1; i >= 0; i--) begin
      if (!vm[i]) lo_live = i;
      if (pm[i])  lo_pend = i;
    end
    checks++;
    if (viral_status != vm) begin
      failures++; $display("%0t FAIL viral %b model %b", $time, viral_status, vm);
    end
    checks++;
    if (msi_valid != (lo_pend >= 0 && lo_live >= 0)
        || (msi_valid && (int'(msi_dst) != lo_live || int'(msi_failed_cn) != lo_pend))) begin
      failures++; $display("%0t FAIL msi valid=%b dst=%0d cn=%0d model %0d %0d", $time, msi_valid, msi_dst, msi_failed_cn, lo_live, lo_pend);
    end
    if (msi_valid && msi_ready && lo_pend >= 0) begin
      pm[lo_pend] = 1'b0; reported[lo_pend]++; n_msi++;
    end
    for (int i = 0; i < NCN; i++) begin
      if (link_alive[i] || vm[i]) quiet[i] = 0;
      else begin
        quiet[i]++;
        if (quiet[i] == TO) begin vm[i] = 1'b1; pm[i] = 1'b1; quiet[i] = 0; end
      end
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    link_alive = '1; msi_ready = 0;
    for (int i = 0; i < NCN; i++) begin quiet[i] = 0; gap_left[i] = 0; reported[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    repeat (TO + 50) @(posedge clk);
    for (int i = 0; i < NCN; i++) begin
      checks++;
      if (reported[i] != (dead[i] ? 1 : 0)) begin
        failures++; $display("FAIL CN%0d reported %0d times, dead=%b", i, reported[i], dead[i]);
      end
    end
    checks++;
    if (n_fail == 0 || n_long_gap == 0) begin failures++; $display("FAIL no failure or no long gap"); end
    $display("failures injected=%0d msi=%0d long gaps=%0d", n_fail, n_msi, n_long_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
