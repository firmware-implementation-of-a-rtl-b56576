// relu_vec: element-wise rectified linear unit on one state vector,
// f(x) = 0 for x <= 0 and f(x) = x otherwise, the activation of every RNN
// cell, as in the original network. Combinational; the enclosing cell
// registers the result.
module relu_vec
  import rnn_pkg::*;
#(
  parameter int unsigned N = N_STATE
) (
  input  data_t [N-1:0] t,
  output data_t [N-1:0] s
);
  always_comb begin
    for (int i = 0; i < N; i++) s[i] = (t[i] > 0) ? t[i] : '0;
  end
endmodule
