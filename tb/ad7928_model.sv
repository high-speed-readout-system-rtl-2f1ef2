// ad7928_model -- behavioural model of an 8-channel 12-bit SPI ADC of the
// AD7928 type, for simulation only.
//
// A conversion frame starts when cs_n falls: dout shows the leading zero, and
// after each falling sclk edge the next bit of {0, ADD[2:0], DATA[11:0]} for
// the channel selected by the previous frame's control word. The control word
// is shifted in from din on falling edges; if its WRITE bit (bit 15) is set,
// ADD (bits 12..10) selects the channel of the next frame. value[] is set by
// the testbench; frames counts completed 16-edge frames, chan_log records the
// channel converted in each frame.
module ad7928_model (
  input  logic cs_n,
  input  logic sclk,
  input  logic din,
  output logic dout
);
  logic [11:0] value [8];
  logic [15:0] ctrl, out_word;
  logic [2:0]  cur_ch;
  int          cnt, frames;
  int          chan_log [$];

  initial begin
    dout = 1'b0;
    cur_ch = 3'd0;
    cnt = 0;
    frames = 0;
    ctrl = '0;
    out_word = '0;
  end

  always @(negedge cs_n) begin
    cnt = 0;
    out_word = {1'b0, cur_ch, value[cur_ch]};
    dout = out_word[15];
  end

  always @(negedge sclk) if (!cs_n) begin
    ctrl = {ctrl[14:0], din};
    cnt++;
    dout = (cnt <= 15) ? out_word[15 - cnt] : 1'b0;
  end

  always @(posedge cs_n) begin
    if (cnt == 16) begin
      frames++;
      chan_log.push_back(int'(cur_ch));
      if (ctrl[15]) cur_ch = ctrl[12:10];
    end
  end
endmodule
