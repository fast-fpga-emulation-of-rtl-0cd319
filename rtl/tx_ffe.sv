// tx_ffe: three-tap transmit feed-forward equalizer.
//
// On each TX clock edge (cke) the FFE shifts the new bit into a three-bit
// window {d[n+1], d[n], d[n-1]} (the new bit and the two before it) and updates its output, the piecewise-constant
// channel input:
//
//   channel_in = c_pre * d[n+1] + c_main * d[n] + c_post * d[n-1],  d = +/-1
//
// Weights are in 1/256 units (output Q4.8) and are chosen by the 4-bit
// setting. Settings 0..9 follow the ten 8 GT/s PCIe transmitter presets
// P0..P9 (c_main = 256 - |c_pre| - |c_post|), settings 10..15 repeat P4 (no
// equalization). The paper gives the tap count and the 4-bit setting; the
// preset table is this design's choice. Because the pre-cursor needs the next
// bit, the main cursor lags tx_data by one TX period.
//
// Timing: channel_in changes in the cycle after a cycle with cke high, which
// is the alignment the analog dynamics engine expects.
module tx_ffe
  import hsl_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cke,
  input  logic                      tx_data,
  input  logic [3:0]                setting,
  output logic signed [VALUE_W-1:0] channel_in
);

  typedef struct packed {
    logic signed [9:0] pre;
    logic signed [9:0] post;
  } ffe_coef_t;

  function automatic ffe_coef_t preset(logic [3:0] s);
    case (s)
      4'd0:    return '{pre:   10'sd0, post: -10'sd64};  // P0
      4'd1:    return '{pre:   10'sd0, post: -10'sd43};  // P1
      4'd2:    return '{pre:   10'sd0, post: -10'sd51};  // P2
      4'd3:    return '{pre:   10'sd0, post: -10'sd32};  // P3
      4'd4:    return '{pre:   10'sd0, post:  10'sd0};   // P4
      4'd5:    return '{pre: -10'sd26, post:  10'sd0};   // P5
      4'd6:    return '{pre: -10'sd32, post:  10'sd0};   // P6
      4'd7:    return '{pre: -10'sd26, post: -10'sd51};  // P7
      4'd8:    return '{pre: -10'sd32, post: -10'sd32};  // P8
      4'd9:    return '{pre: -10'sd43, post:  10'sd0};   // P9
      default: return '{pre:   10'sd0, post:  10'sd0};   // as P4
    endcase
  endfunction

  logic [1:0]        win;        // the two previous bits, win[0] the newer
  ffe_coef_t         c;
  logic signed [11:0] c_main;
  logic signed [VALUE_W-1:0] next;

  function automatic logic signed [VALUE_W-1:0] term(logic bit_i, logic signed [11:0] w);
    return bit_i ? VALUE_W'(w) : -VALUE_W'(w);
  endfunction

  always_comb begin
    c      = preset(setting);
    // c_main = 256 - |pre| - |post|; pre and post are never positive
    c_main = 12'sd256 + 12'(c.pre) + 12'(c.post);
    next   = term(tx_data, 12'(c.pre)) + term(win[0], c_main) + term(win[1], 12'(c.post));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      win        <= '0;
      channel_in <= '0;
    end else if (cke) begin
      win        <= {win[0], tx_data};
      channel_in <= next;
    end
  end

endmodule
