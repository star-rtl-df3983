// tb_star_out_fifo -- checks the output FIFO against a queue model.
//
// 5,000 cycles of random pushes and pops: every popped word must be the
// oldest pushed one, in_ready must be low exactly when DEPTH words are held,
// out_valid high exactly when at least one is. Both the full and the empty
// case must occur.
module tb_star_out_fifo;

  localparam int W = 68, DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;

  star_out_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, nfull = 0, nempty = 0;
  logic [W-1:0] q [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    chk(in_ready == (q.size() < DEPTH), "in_ready");
    chk(out_valid == (q.size() > 0), "out_valid");
    if (q.size() == DEPTH) nfull++;
    if (q.size() == 0) nempty++;
    if (out_valid && out_ready) begin
      chk(q.size() > 0 && out_data == q[0], "data");
      if (q.size() > 0) void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int phase = (n / 500) % 3;  // fill-biased, drain-biased, balanced
      @(negedge clk);
      in_valid  = $urandom_range(0, 9) < (phase == 0 ? 8 : phase == 1 ? 2 : 5);
      out_ready = $urandom_range(0, 9) < (phase == 0 ? 2 : phase == 1 ? 8 : 5);
      in_data   = {4'($urandom()), $urandom(), $urandom()};
    end
    chk(nfull > 0, "full seen");
    chk(nempty > 0, "empty seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
