// mlp_sched_pkg: software side of the bespoke co-processor, for testbenches.
//
// A weighted sum sum_i w_i * x_i is folded onto K multipliers with fixed
// constants C_j by a list of calls. In each call every multiplier input
// field j holds either an activation x_i or 0, and the call adds
// sum_j C_j * field_j to the running sum. The scheduler here is a simple
// greedy one, standing in for the offline constraint solver that a real
// flow would use: for each weight still (partly) open it takes, in this
// order, a free multiplier whose constant equals the remaining weight
// (direct), two free multipliers whose constants add up to it (split within
// one call), or the free multiplier of the same sign with the largest
// constant not above it in magnitude (split across calls, the rest left for
// a later call). With a +1 and a -1 multiplier every weight is reachable,
// so the loop always ends. A neuron whose weights are all zero gets one call
// with empty fields, so that its sum is 0 rather than the previous one.
package mlp_sched_pkg;

  typedef struct {
    int calls;     // number of co-processor calls
    int direct;    // weights mapped to one multiplier with their value
    int pair;      // weights split over two multipliers in one call
    int partial;   // partial products deferring a rest to a later call
  } sched_stats_t;

  // Returns K slot entries per call: the activation index or -1 (zero).
  function automatic void schedule(input int coefs[], input int w[],
                                   output int sched[$], output sched_stats_t st);
    int k = coefs.size();
    int rem[] = new[w.size()];
    int slot[] = new[k];
    bit open;
    st = '{0, 0, 0, 0};
    sched = {};
    foreach (w[i]) rem[i] = w[i];
    forever begin
      open = 0;
      foreach (rem[i]) if (rem[i] != 0) open = 1;
      if (!open && st.calls > 0) break;  // an all-zero neuron still gets one call
      foreach (slot[j]) slot[j] = -1;
      foreach (rem[i]) begin
        int best;
        bit done;
        if (rem[i] == 0) continue;
        done = 0;
        // direct
        for (int j = 0; j < k && !done; j++)
          if (slot[j] < 0 && coefs[j] == rem[i]) begin
            slot[j] = i; rem[i] = 0; done = 1; st.direct++;
          end
        // two multipliers in one call
        for (int a = 0; a < k && !done; a++)
          for (int b = a + 1; b < k && !done; b++)
            if (slot[a] < 0 && slot[b] < 0 && coefs[a] + coefs[b] == rem[i]) begin
              slot[a] = i; slot[b] = i; rem[i] = 0; done = 1; st.pair++;
            end
        // largest same-sign constant not above the rest; rest deferred
        if (!done) begin
          best = -1;
          for (int j = 0; j < k; j++)
            if (slot[j] < 0 && coefs[j] != 0 &&
                ((rem[i] > 0 && coefs[j] > 0 && coefs[j] <= rem[i]) ||
                 (rem[i] < 0 && coefs[j] < 0 && coefs[j] >= rem[i])))
              if (best < 0 || (coefs[j] > 0 ? coefs[j] > coefs[best]
                                             : coefs[j] < coefs[best]))
                best = j;
          if (best >= 0) begin
            slot[best] = i; rem[i] -= coefs[best]; st.partial++;
          end
        end
      end
      foreach (slot[j]) sched.push_back(slot[j]);
      st.calls++;
    end
  endfunction

  // Places the activations of call c into the two operand registers:
  // field j sits MSB-first in rs1, then MSB-first in rs2.
  function automatic void pack(input int l, input int k, input int sched[$],
                               input int c, input int x[],
                               output logic [31:0] rs1, output logic [31:0] rs2);
    int per = 32 / l;
    logic [31:0] mask = (32'd1 << l) - 1;
    rs1 = '0;
    rs2 = '0;
    for (int j = 0; j < k; j++) begin
      int idx = sched[c * k + j];
      logic [31:0] v = (idx >= 0) ? (32'(x[idx]) & mask) : 32'd0;
      int sh = 32 - l * ((j % per) + 1);
      if (j < per) rs1 |= v << sh;
      else         rs2 |= v << sh;
    end
  endfunction

  // Reference dot product, modulo 2^32.
  function automatic int dot(input int w[], input int x[]);
    int s = 0;
    foreach (w[i]) s += w[i] * x[i];
    return s;
  endfunction

  // Random signed value of a given width.
  function automatic int srand(input int bits);
    int v = int'($urandom_range((1 << bits) - 1, 0));
    return v - (1 << (bits - 1));
  endfunction

  // R-type co-processor instruction: funct7 = 0000001, opcode 0110011.
  function automatic logic [31:0] cp_instr(input logic [2:0] funct3,
                                           input logic [4:0] rd,
                                           input logic [4:0] rs1,
                                           input logic [4:0] rs2);
    return {7'b0000001, rs2, rs1, funct3, rd, 7'b0110011};
  endfunction

endpackage
