// dram_log_model: behavioural model of the DRAM device that holds a Logging
// Unit's log (not synthesizable; the DRAM itself is not part of the design).
// Writes are taken every cycle; a read returns its entry LAT cycles after the
// request, one read in flight at a time. Storage is a sparse associative
// array, so the full 18 MB log costs memory only for the slots written.
// The size is the paper's 18 MB log; the latency and the one-read limit are
// my own choices.
module dram_log_model
  import recxl_pkg::*;
#(
  parameter int unsigned ENTRIES = 1572864,
  parameter int unsigned LAT     = 4
) (
  input  logic                 clk,
  input  logic                 dw_valid,
  output logic                 dw_ready,
  input  logic [$clog2(ENTRIES)-1:0] dw_addr,
  input  dram_entry_t          dw_data,
  input  logic                 dr_valid,
  output logic                 dr_ready,
  input  logic [$clog2(ENTRIES)-1:0] dr_addr,
  output logic                 drr_valid,
  output dram_entry_t          drr_data
);
  dram_entry_t mem [int];
  int          wait_cnt = -1;
  int          raddr = 0;

  assign dw_ready = 1'b1;
  assign dr_ready = (wait_cnt < 0);

  initial begin drr_valid = 1'b0; drr_data = '0; end

  always @(posedge clk) begin
    drr_valid <= 1'b0;
    if (dw_valid) mem[int'(dw_addr)] = dw_data;
    if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
    else if (wait_cnt == 0) begin
      drr_valid <= 1'b1;
      drr_data  <= mem.exists(raddr) ? mem[raddr] : '0;
      wait_cnt  <= -1;
    end
    if (dr_valid && dr_ready) begin
      raddr    <= int'(dr_addr);
      wait_cnt <= LAT - 1;
    end
  end
endmodule
