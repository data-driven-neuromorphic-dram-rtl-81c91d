// nh_mac: one NullHop MAC unit (Fig. 5), computing one output feature map.
// Each valid beat multiplies the broadcast non-zero pixel value by the weight
// read from the unit's kernel bank and adds it to a 32-bit accumulator.
// A `last` beat ends the output pixel: the sum is presented on result with
// res_valid for one cycle and the accumulator restarts from the bias. The
// bias (16 bits, in output units) is aligned to the accumulator by shifting
// it left by the layer's output shift. `clear` loads the bias at layer start.
// Disabled units (en low: their controller's cluster is not used in this
// pass) hold their accumulator. Accumulator width and bias alignment are
// this design's choices. Timing: one MAC per cycle, result one cycle after
// the `last` beat.
module nh_mac
  import nh_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         clear,
  input  logic [4:0]   shift,
  input  logic         bias_wr,
  input  logic [DW-1:0] bias_data,
  input  logic         valid,
  input  logic         last,
  input  pix_t         value,
  input  pix_t         weight,
  output acc_t         result,
  output logic         res_valid
);
  pix_t bias;
  acc_t acc, bias_al;
  assign bias_al = acc_t'(bias) <<< shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias <= '0; acc <= '0; result <= '0; res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (bias_wr) bias <= bias_data;
      if (clear) acc <= bias_al;
      else if (en && last) begin
        result    <= acc;
        res_valid <= 1'b1;
        acc       <= bias_al;
      end else if (en && valid) acc <= acc + acc_t'(value) * acc_t'(weight);
    end
  end
endmodule
