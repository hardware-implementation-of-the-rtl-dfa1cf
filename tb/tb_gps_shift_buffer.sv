// tb_gps_shift_buffer: self-checking test of the serial accumulator buffer.
//
// Writes random words with a random shift enable and checks that every word
// read at the output is the one written exactly DEPTH shifts earlier (a
// queue kept here), that a cycle without shift holds the output, and that
// reset leaves the buffer all zero.
module tb_gps_shift_buffer;
  import gps_pkg::*;

  localparam int W = WORD_W, D = BUF_WORDS;

  logic         clk = 0, rst_n = 0, shift = 0;
  logic [W-1:0] d_in = '0, d_out;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0;

  gps_shift_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) model.push_back('0);
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (d_out !== model[0]) begin
        failures++;
        $display("FAIL step %0d: out=%h exp=%h", i, d_out, model[0]);
      end
      shift = ($urandom_range(0, 3) != 0);
      d_in  = W'($urandom);
      if (shift) begin
        model.push_back(d_in);
        void'(model.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
