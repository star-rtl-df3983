// star_randomizer -- stage 1 of STAR: conventional LFSR data randomization.
//
// The four pages of a wordline reach this stage interleaved group by group
// (zig-zag order), so it keeps one LFSR per page (star_lfsr x4). Each beat is
// XORed with the key of the LFSR of its own page, and only that LFSR steps
// on. A page is therefore scrambled by exactly the sequence it would get if
// it were sent alone, page by page, which lets a single page be read back and
// de-randomized on its own. `seed_load` loads the four per-page seeds before
// a wordline. Stream in and out use valid/ready; the output is one register
// stage (one cycle latency, full throughput, back-pressure passes through).
// XOR randomization follows the paper; one LFSR per page and the seeding are
// this design's choices.
module star_randomizer
  import star_pkg::*;
#(
  parameter int unsigned DATA_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seeds [BPC],
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  input  beat_meta_t        in_meta,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output beat_meta_t        out_meta
);

  logic [DATA_W-1:0] key [BPC];
  logic              in_fire;

  assign in_ready = !out_valid || out_ready;
  assign in_fire  = in_valid && in_ready;

  for (genvar p = 0; p < BPC; p++) begin : g_lfsr
    star_lfsr #(.DATA_W(DATA_W)) u_lfsr (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (seed_load),
      .seed    (seeds[p]),
      .advance (in_fire && (in_meta.page == page_e'(p))),
      .key     (key[p])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_meta  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= in_data ^ key[in_meta.page];
        out_meta <= in_meta;
      end
    end
  end

endmodule
