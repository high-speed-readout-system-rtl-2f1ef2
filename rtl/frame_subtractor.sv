// frame_subtractor -- removes each pixel's fixed offset by frame differencing.
//
// Every pixel of the sensor carries its own offset, so the design works on the
// difference between consecutive frames, N minus N-1. Only one frame buffer is
// kept: when pixel k of frame N arrives, the buffer still holds pixel k of
// frame N-1 (pixels before k already hold frame N). The subtractor reads that
// old value, outputs new - old, and writes the new value in its place, all in
// one read-first access of frame_ram.
//
// The output is valid only once the buffer holds a complete previous frame:
// after enabling, the first whole frame (from its start-of-frame pixel to its
// end-of-frame pixel) only fills the buffer. Dropping en forgets that state.
//
// Interface/timing: px_* in, d_* out two clocks later (RAM read, then the
// subtraction register). The difference is signed and one bit wider than a
// pixel. The read-modify-write order follows the paper (Sec. 3, steps 1-2,
// Fig. 4); the priming rule and the latency are this design's choices.
module frame_subtractor
  import readout_pkg::*;
#(
  parameter int unsigned COLS = SENSOR_COLS,
  parameter int unsigned ROWS = SENSOR_ROWS,
  localparam int unsigned XW = $clog2(COLS),
  localparam int unsigned YW = $clog2(ROWS),
  localparam int unsigned AW = $clog2(COLS*ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          px_valid,
  input  pixel_t        px_data,
  input  logic [XW-1:0] px_x,
  input  logic [YW-1:0] px_y,
  input  logic [AW-1:0] px_addr,
  input  logic          px_sof,
  input  logic          px_eof,
  output logic          d_valid,
  output diff_t         d_diff,
  output logic [XW-1:0] d_x,
  output logic [YW-1:0] d_y,
  output logic          primed
);

  logic          filling_q;
  logic          s1_valid;
  pixel_t        s1_new;
  logic [XW-1:0] s1_x;
  logic [YW-1:0] s1_y;
  pixel_t        old_pix;
  logic          access;

  assign access = en && px_valid;

  frame_ram #(.DEPTH(COLS*ROWS), .WIDTH(PIX_W)) u_frame_ram (
    .clk   (clk),
    .en    (access),
    .we    (access),
    .addr  (px_addr),
    .wdata (px_data),
    .rdata (old_pix)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling_q <= 1'b0;
      primed    <= 1'b0;
      s1_valid  <= 1'b0;
      s1_new    <= '0;
      s1_x      <= '0;
      s1_y      <= '0;
      d_valid   <= 1'b0;
      d_diff    <= '0;
      d_x       <= '0;
      d_y       <= '0;
    end else begin
      // stage 1: RAM read in flight
      s1_valid <= access && primed;
      if (access) begin
        s1_new <= px_data;
        s1_x   <= px_x;
        s1_y   <= px_y;
      end
      // stage 2: N - (N-1)
      d_valid <= s1_valid;
      if (s1_valid) begin
        d_diff <= $signed({1'b0, s1_new}) - $signed({1'b0, old_pix});
        d_x    <= s1_x;
        d_y    <= s1_y;
      end
      // buffer state
      if (!en) begin
        filling_q <= 1'b0;
        primed    <= 1'b0;
      end else if (px_valid) begin
        if (px_sof) filling_q <= 1'b1;
        if (px_eof && (filling_q || px_sof)) primed <= 1'b1;
      end
    end
  end

endmodule
