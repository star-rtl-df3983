// tb_star_randomizer -- checks the LFSR randomization stage.
//
// Loads four per-page seeds, then sends 2,000 beats in zig-zag page order
// (two beats per page chunk) with random valid gaps and random output stalls.
// Every output beat must equal the input beat XOR the next 64 bits of its own
// page's reference LFSR, and the side-band must pass through unchanged. With
// no stalls the stage must take and return one beat per cycle, one cycle late.
module tb_star_randomizer;
  import star_pkg::*;
  import tb_star_ref_pkg::*;

  localparam int N = 2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              seed_load;
  logic [31:0]       seeds [4];
  logic              in_valid, in_ready, out_valid, out_ready;
  logic [63:0]       in_data, out_data;
  beat_meta_t        in_meta, out_meta;

  star_randomizer #(.DATA_W(64)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] rs [4];
  logic [63:0] exp_q [$];
  beat_meta_t  expm_q [$];
  int          nout = 0;
  bit          stalls = 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(exp_q.size() > 0, "unexpected beat");
      if (exp_q.size() > 0) begin
        chk(out_data == exp_q.pop_front(), "data");
        chk(out_meta == expm_q.pop_front(), "meta");
      end
      nout++;
    end
  end

  always @(negedge clk) out_ready <= stalls ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    int n;
    seed_load = 0; in_valid = 0; in_data = '0; in_meta = '0; out_ready = 1;
    for (int p = 0; p < 4; p++) begin
      seeds[p] = $urandom() | 32'h1;
      rs[p]    = seeds[p];
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk) seed_load = 1;
    @(negedge clk) seed_load = 0;
    n = 0;
    while (n < N) begin
      bit fire;
      @(negedge clk);
      in_valid = stalls ? ($urandom_range(0, 4) != 0) : 1'b1;
      in_data  = {$urandom(), $urandom()};
      in_meta.page  = page_e'((n / 2) % 4);
      in_meta.glast = (n % 8) == 7;
      in_meta.wlast = n == N - 1;
      #1 fire = in_valid && in_ready;
      @(posedge clk);
      if (fire) begin
        exp_q.push_back(in_data ^ ref_key64(rs[in_meta.page]));
        expm_q.push_back(in_meta);
        n++;
        if (n == N / 2) stalls = 0;  // second half: no gaps, no stalls
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    chk(nout == N, "beat count");
    chk(exp_q.size() == 0, "all beats out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate: in the stall-free half, a beat is taken every cycle and comes
  // out in the next one
  always @(posedge clk) if (rst_n && !stalls && in_valid) begin
    chk(in_ready, "in_ready high with no stall");
  end
  always @(posedge clk) if (rst_n && !stalls && nout > N / 2 + 2 && nout < N - 1) begin
    chk(out_valid, "one cycle latency, no bubble");
  end

endmodule
