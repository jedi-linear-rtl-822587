// cmvm_da -- multiplier-free dense layer: y = requant(W x + b), combinational.
//
// Every constant weight w of table LAYER is rewritten at elaboration time in canonical signed
// digit (CSD) form, w = sum_k d_k 2^k with d_k in {-1, 0, +1} and no two adjacent non-zero
// digits. The layer is then nothing but shifted copies of the inputs added or subtracted into
// one accumulator per output: the distributed-arithmetic view of a constant matrix-vector
// multiply. Pruned weights (w = 0) contribute no term at all. Each output has its own
// generate block holding its term list TERMS (input index, shift, sign of every non-zero digit)
// and its bias as localparams computed at elaboration, so every add/subtract condition below is a
// constant and synthesis sees a fixed adder graph with no multiplier and no weight memory.
// Sharing of common sub-expressions between outputs is left to the synthesis tool.
//
// Requantization: the accumulator (ACC_W bits, wide enough never to overflow) is shifted right
// arithmetically by W_SHIFT, saturated to 8 bits and, if RELU is set, clamped at zero.
//
// Interface: x[N_IN] in, y[N_OUT] out, 8-bit signed; no clock, zero latency. Wrappers
// (einsum_dense, dense_layer) add the pipeline register. The CSD adder form follows the
// shift-add decomposition of the JEDI-linear design; the formats, the saturation and the ReLU
// are this design's choices.
module cmvm_da
  import jedi_pkg::*;
#(
  parameter int N_IN  = 16,
  parameter int N_OUT = 32,
  parameter int LAYER = L_IN_PROJ,
  parameter bit RELU  = 1'b1
) (
  input  act_t x [N_IN],
  output act_t y [N_OUT]
);

  localparam int ACC_W = ACT_W + W_MAXB + 3 + $clog2(N_IN);

  // Each output is a list of terms (input index, shift, sign): one per non-zero CSD digit of
  // the output's weight row. The lists are built at elaboration.
  typedef struct packed {
    logic [15:0] idx;
    logic [3:0]  shift;
    logic        neg;
  } term_t;

  function automatic int count_terms(int o);
    int n;
    csd_t c;
    n = 0;
    for (int i = 0; i < N_IN; i++) begin
      c = csd(weight(LAYER, o, i));
      for (int k = 0; k < CSD_D; k++) n += int'(c.pos[k]) + int'(c.neg[k]);
    end
    return n;
  endfunction

  // A CSD weight of up to 9 digits has at most 5 non-zero ones.
  localparam int MAXT = N_IN * ((CSD_D + 1) / 2);
  localparam int IDX_W = (N_IN > 1) ? $clog2(N_IN) : 1;
  typedef term_t [MAXT-1:0] list_t;

  function automatic list_t make_list(int o);
    list_t l;
    csd_t  c;
    int    n;
    l = '0;
    n = 0;
    for (int i = 0; i < N_IN; i++) begin
      c = csd(weight(LAYER, o, i));
      for (int k = 0; k < CSD_D; k++) begin
        if (c.pos[k] || c.neg[k]) begin
          l[n] = '{idx: 16'(i), shift: 4'(k), neg: c.neg[k]};
          n++;
        end
      end
    end
    return l;
  endfunction

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    localparam int NT    = count_terms(o);
    localparam list_t                   TERMS = make_list(o);
    localparam logic signed [ACC_W-1:0] BIAS  = ACC_W'(bias(LAYER, o));
    act_t y_o;

    always_comb begin
      logic signed [ACC_W-1:0] acc, sh;
      acc = BIAS;
      for (int t = 0; t < NT; t++) begin
        if (TERMS[t].neg) acc = acc - (ACC_W'(x[IDX_W'(TERMS[t].idx)]) <<< TERMS[t].shift);
        else              acc = acc + (ACC_W'(x[IDX_W'(TERMS[t].idx)]) <<< TERMS[t].shift);
      end
      sh = acc >>> W_SHIFT;
      if (sh > ACC_W'(ACT_MAX))      y_o = act_t'(ACT_MAX);
      else if (sh < ACC_W'(ACT_MIN)) y_o = act_t'(ACT_MIN);
      else                           y_o = act_t'(sh);
      if (RELU && y_o < 0) y_o = '0;
    end

    assign y[o] = y_o;
  end

endmodule
