// tb_star_derandomizer -- checks the read path for whole 16 KiB pages.
//
// For each of three pages: random user data, a random seed and a random FIB
// bit per group. The stored page is built here as data ^ LFSR key ^ FIB bit
// of the word's group (two words per group), i.e. what the write path leaves
// in flash for that page. The page's 16 FIB words and 2048 data words are fed
// with random gaps and output stalls; every output word must equal the user
// data, with out_last on the last word and busy low afterwards.
module tb_star_derandomizer;
  import star_pkg::*;
  import tb_star_ref_pkg::*;

  localparam int PW = 2048, GROUPS = 1024, FWORDS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, fib_valid, fib_ready, in_valid, in_ready;
  logic        out_valid, out_ready, out_last;
  logic [31:0] seed;
  logic [63:0] fib_data, in_data, out_data;

  star_derandomizer #(.DATA_W(64), .PAGE_BYTES(16384), .GROUP_CELLS(128)) dut (.*);

  int checks = 0, failures = 0, nout = 0;
  logic [63:0] user [PW];
  logic [63:0] stored [PW];
  logic [GROUPS-1:0] fibv;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t word %0d", what, $time, nout);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= $urandom_range(0, 3) != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    chk(out_data == user[nout], "recovered data");
    chk(out_last == (nout == PW - 1), "out_last");
    nout++;
  end

  initial begin
    start = 0; seed = '0; fib_valid = 0; fib_data = '0; in_valid = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int pg = 0; pg < 3; pg++) begin
      logic [31:0] s;
      seed = $urandom() | 32'h1;
      s = seed;
      for (int g = 0; g < GROUPS; g++) fibv[g] = $urandom_range(0, 1);
      for (int w = 0; w < PW; w++) begin
        user[w]   = pg == 1 ? 64'h0 : {$urandom(), $urandom()};  // page 1 all zero
        stored[w] = user[w] ^ ref_key64(s) ^ {64{fibv[w / 2]}};
      end
      nout = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int w = 0; w < FWORDS; w++) begin
        bit fire;
        forever begin
          @(negedge clk);
          fib_valid = $urandom_range(0, 3) != 0;
          fib_data  = fibv[w * 64 +: 64];
          #1 fire = fib_valid && fib_ready;
          @(posedge clk);
          if (fire) break;
        end
      end
      @(negedge clk) fib_valid = 0;
      for (int w = 0; w < PW; w++) begin
        bit fire;
        forever begin
          @(negedge clk);
          in_valid = $urandom_range(0, 4) != 0;
          in_data  = stored[w];
          #1 fire = in_valid && in_ready;
          @(posedge clk);
          if (fire) break;
        end
      end
      @(negedge clk) in_valid = 0;
      wait (nout == PW);
      @(negedge clk);
      chk(!busy, "idle after page");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
