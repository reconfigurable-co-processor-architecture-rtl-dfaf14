// activation_fn: the selectable activation function (AF) of a cell body.
//
// sel chooses, per layer, between no activation, ReLU, sigmoid and tanh on
// a Q(16,15) value. ReLU clears negative values. Sigmoid is the PLAN
// piecewise-linear approximation, built from shifts and adds only:
//   |x| >= 5      : 1
//   |x| >= 2.375  : |x|/32 + 0.84375
//   |x| >= 1      : |x|/8  + 0.625
//   otherwise     : |x|/4  + 0.5
// and 1 - y for negative x. tanh is derived from it as 2*sigmoid(2x) - 1.
// The approximations are this design's choice; the architecture names the
// functions but not their circuits. The output is registered: latency 1.
module activation_fn
  import cnn_pkg::*;
(
  input  logic    clk,
  input  af_sel_e sel,
  input  qword_t  x,
  output qword_t  y
);
  localparam qword_t Q_FIVE = qword_t'(5) <<< FRAC_W;
  localparam qword_t Q_2375 = qword_t'(77824);   // 2.375
  localparam qword_t Q_0844 = qword_t'(27648);   // 0.84375
  localparam qword_t Q_0625 = qword_t'(20480);   // 0.625
  localparam qword_t Q_HALF = qword_t'(16384);   // 0.5
  localparam qword_t Q_MAX  = {1'b0, {(DATA_W-1){1'b1}}};

  function automatic qword_t plan_sigmoid(qword_t v);
    qword_t a, s;
    a = (v < 0) ? ((v == ~Q_MAX) ? Q_MAX : -v) : v;
    if (a >= Q_FIVE)      s = Q_ONE;
    else if (a >= Q_2375) s = (a >>> 5) + Q_0844;
    else if (a >= Q_ONE)  s = (a >>> 3) + Q_0625;
    else                  s = (a >>> 2) + Q_HALF;
    return (v < 0) ? Q_ONE - s : s;
  endfunction

  qword_t x2, y_next;

  always_comb begin
    // 2x saturates so that tanh of a large value still reaches +-1
    if (x > (Q_MAX >>> 1))       x2 = Q_MAX;
    else if (x < (~Q_MAX >>> 1)) x2 = ~Q_MAX;
    else                         x2 = x <<< 1;
    unique case (sel)
      AF_RELU:    y_next = (x < 0) ? '0 : x;
      AF_SIGMOID: y_next = plan_sigmoid(x);
      AF_TANH:    y_next = (plan_sigmoid(x2) <<< 1) - Q_ONE;
      default:    y_next = x;
    endcase
  end

  always_ff @(posedge clk) y <= y_next;
endmodule
