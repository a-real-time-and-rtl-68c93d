// mapper: the one-to-one (POOL = 1) or two-to-one (POOL = 2) mapper of a fused
// processing block.
//
// Each cycle the mapper handles one row i of the projection (m = 10 rows, one
// per cycle). For each of its POOL input values a_t it forms the
// projection-out value c_t = w_i*a_t + b_i with one MAC (m1 = a_t,
// m2 = projection-out weight, ps = projection-out bias), brings it back to
// 10 bits and applies ReLU. For POOL = 2 a 2-input comparator keeps the
// larger of the two (the max-pool); ReLU and max commute, so this equals
// max-pool after ReLU. A second MAC multiplies the result by the
// projection-in weight w'_i and adds it to the accumulation register. Over
// the 10 rows this computes
//
//   acc = sum_i w'_i * max_t ReLU(w_i a_t + b_i).
//
// acc_next is the sum including the present row; the enclosing block adds
// the projection-in bias to acc_next in the last row and writes the output.
// 'first' marks row 0 and restarts the sum. The MAC/ReLU/MAC chain and the
// accumulation register follow the paper's drawing of the mapper; the
// requantization between the two MACs is this design's choice.
module mapper
  import dsd_pkg::*;
#(
  parameter int unsigned POOL = 1
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,      // a row is processed this cycle
  input  logic             first,   // row 0 of a mapping
  input  act_t [POOL-1:0]  a,       // input value(s) a_j
  input  wgt_t             w_po,    // projection-out weight of this row
  input  wgt_t             b_po,    // projection-out bias of this row
  input  wgt_t             w_pi,    // projection-in weight of this row
  output acc_t             acc_next
);
  acc_t acc;        // accumulation register
  act_t d;          // ReLU (and max-pool) output

  always_comb begin
    d = '0;   // ReLU floor: max with zero
    for (int t = 0; t < POOL; t++)
      d = max2(d, requant(mul(a[t], w_po) + bias(b_po)));
    acc_next = (first ? acc_t'(0) : acc) + mul(d, w_pi);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  acc <= '0;
    else if (en) acc <= acc_next;
endmodule
