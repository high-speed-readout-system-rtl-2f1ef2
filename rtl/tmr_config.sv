// tmr_config -- configuration registers with triple modular redundancy.
//
// The settings read from the nonvolatile FRAM (sensor settings and the event
// and split thresholds) are kept in three separate copies, and every read
// returns the bitwise majority of the three, so a single-event upset in one
// copy never reaches the logic that uses the value. A write stores the same
// word into all three copies, which also repairs an upset word.
//
// Interface: one write port (wr_en/wr_addr/wr_data), one combinational read
// port (rd_addr/rd_data), all voted words in parallel on cfg, and mismatch,
// high while any word has a copy that disagrees with the vote (for
// housekeeping). upset_* flips the bits upset_mask of word upset_addr in copy
// upset_copy; it exists so that an upset can be injected in test, and is tied
// off in normal use. Copies reset to zero.
//
// Three copies with majority decision follow the paper (Sec. 2); the word
// count, width, write-through repair and mismatch flag are this design's.
module tmr_config
  import readout_pkg::*;
#(
  parameter int unsigned WORDS = CFG_WORDS,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  output logic [WIDTH-1:0] cfg [WORDS],
  output logic             mismatch,
  input  logic             upset_en,
  input  logic [1:0]       upset_copy,
  input  logic [AW-1:0]    upset_addr,
  input  logic [WIDTH-1:0] upset_mask
);

  logic [WIDTH-1:0] copy_q [3][WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 3; c++)
        for (int i = 0; i < WORDS; i++) copy_q[c][i] <= '0;
    end else begin
      if (upset_en && upset_copy < 2'd3)
        copy_q[upset_copy][upset_addr] <= copy_q[upset_copy][upset_addr] ^ upset_mask;
      if (wr_en)
        for (int c = 0; c < 3; c++) copy_q[c][wr_addr] <= wr_data;
    end
  end

  always_comb begin
    mismatch = 1'b0;
    for (int i = 0; i < WORDS; i++) begin
      cfg[i] = (copy_q[0][i] & copy_q[1][i]) | (copy_q[0][i] & copy_q[2][i])
             | (copy_q[1][i] & copy_q[2][i]);
      if (copy_q[0][i] != copy_q[1][i] || copy_q[0][i] != copy_q[2][i]) mismatch = 1'b1;
    end
  end

  assign rd_data = cfg[rd_addr];

endmodule
