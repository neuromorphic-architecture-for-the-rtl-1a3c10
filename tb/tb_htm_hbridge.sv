// tb_htm_hbridge -- self-checking test of the H-Bridge broadcast tree.
//
// Sends a random message every clock for 300 clocks and checks that every
// one of the 100 leaves shows message t exactly LEVELS clocks after it was
// sent, and NOP before the first message arrives.
module tb_htm_hbridge;
  import htm_pkg::*;

  localparam int N = N_COL;
  localparam int L = $clog2(N) + 1;

  logic clk = 0, rst_n = 0;
  hb_msg_t msg_in;
  hb_msg_t msg_out [N];
  hb_msg_t sent [$];

  int checks = 0, failures = 0;

  htm_hbridge dut (.clk, .rst_n, .msg_in, .msg_out);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    msg_in = '{op: HB_NOP, data: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300 + L; t++) begin
      hb_msg_t m;
      m.op   = hb_op_e'($urandom_range(7, 0));
      m.data = CELL_AW'($urandom);
      msg_in = m;
      sent.push_back(m);
      @(negedge clk);
      // msg sent at step t-L+1 must be visible now (t+1 edges after step 0)
      for (int i = 0; i < N; i++) begin
        checks++;
        if (t + 1 >= L) begin
          if (msg_out[i] !== sent[t + 1 - L]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d leaf %0d", t, i);
          end
        end else if (msg_out[i].op != HB_NOP) begin
          failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
