// classifier: threshold classification of integrated I/Q values into up to
// four categories. Two host-set lines give one bit each:
// bit k = (a_k * I + b_k * Q >= c_k), category = {bit1, bit0}. With bypass
// set the value itself is forwarded (is_class = 0). Latency: 1 cycle. The
// two-line rule is this design's choice; the source gives only "threshold
// parameters" and up to four categories.
module classifier
  import qube_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            bypass,
  input  thr_line_t [1:0] thr,
  input  accs_t           din,
  output cap_word_t       dout,
  output logic            dout_valid,
  output logic            dout_last
);
  logic [1:0] cls;

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      logic signed [79:0] s;
      s = 80'(thr[k].a) * 80'(din.d.i) + 80'(thr[k].b) * 80'(din.d.q);
      cls[k] = (s >= 80'(thr[k].c));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0; dout_valid <= 1'b0; dout_last <= 1'b0;
    end else begin
      dout_valid    <= din.valid;
      dout_last     <= din.last;
      dout.is_class <= ~bypass;
      dout.cls      <= bypass ? 2'b00 : cls;
      dout.val      <= din.d;
    end
  end

endmodule
