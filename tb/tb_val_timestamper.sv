// tb_val_timestamper: sends random REPL, REPL_ACK and VAL messages through the
// timestamper with random back-pressure and checks that every VAL carries
// the next value of its destination's counter (1, 2, ... wrapping at 7 bits),
// that other messages pass unchanged, and that a VAL held back by the port
// does not advance the counter.
//
// Interface and timing: valid/ready on both sides with random back-pressure;
// one message per cycle. From the paper: one counter per destination CN,
// incremented for each VAL. Own choices: the first TS is 1 and the counter
// advances only when the VAL is taken.
module tb_val_timestamper;
  import recxl_pkg::*;
  localparam int unsigned NCN = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  msg_t in_msg, out_msg;
  int checks = 0, failures = 0;
  int model [NCN];

  val_timestamper #(.NCN(NCN)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_msg = '0; out_ready = 0;
    for (int i = 0; i < NCN; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_msg = '0;
      in_msg.mtype = msg_type_e'($urandom_range(0, 2));
      in_msg.dst = cn_id_t'($urandom_range(0, NCN - 1));
      in_msg.ts = ts_t'($urandom());
      in_msg.line = {$urandom(), $urandom()};
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (out_valid != in_valid || in_ready != out_ready) begin
        failures++; $display("FAIL handshake");
      end
      if (in_valid) begin
        msg_t exp;
        exp = in_msg;
        if (in_msg.mtype == MSG_VAL) exp.ts = ts_t'((model[in_msg.dst] + 1) % 128);
        checks++;
        if (out_msg != exp) begin
          failures++;
          $display("FAIL type %0d dst %0d ts %0d want %0d", in_msg.mtype, in_msg.dst, out_msg.ts, exp.ts);
        end
        if (out_ready && in_msg.mtype == MSG_VAL) model[in_msg.dst] = (model[in_msg.dst] + 1) % 128;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
