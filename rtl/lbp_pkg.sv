// lbp_pkg: types, sizes and the closed-form Tanner-graph mapping shared by the
// Lottery BP + OSD decoder (PolyQec).
//
// The decoder works on the d-round space-time check matrix of the unrotated
// surface code, H_st = [ blockdiag(H,...,H) | D ], where D ties check c of
// round t to measurement-error columns t-1 and t. For distance d:
//   m  = d(d-1)           checks (CNs) per round, for H_X as for H_Z
//   n  = d^2 + (d-1)^2    data-qubit columns per round
//   T  = d                rounds
//   CNs = T*m,  VNs = T*n (data) + T*m (measurement errors)
// Data VN of qubit q in round t has index t*n+q; the measurement VN of check
// i has index T*n+i.  Every CN has six message slots ("banks"), VN0..VN5:
// VN0/VN1 and VN2/VN3 are data qubits, VN4/VN5 are the previous-round and
// this-round measurement VNs. cn_vn() gives the VN of each slot with the
// shifts of the paper's CN-to-VN table; slots that do not exist (boundary
// checks, round 0 for VN4) come back invalid.
//
// Messages are 8-bit signed fixed point with 4 fraction bits (Int3.4), the
// format the paper settles on after its quantization study.
package lbp_pkg;

  localparam int MSG_W  = 8;   // Int3.4: sign, 3 integer bits, 4 fraction bits
  localparam int FRAC_W = 4;
  localparam int NBANK  = 6;   // six message slots per CN (Fig. 11 banks 0..5)
  localparam int RAND_W = 16;  // resolution of the random value r in [0,1)

  typedef logic signed [MSG_W-1:0] msg_t;

  localparam msg_t MSG_MAX = msg_t'(2**(MSG_W-1) - 1);
  localparam msg_t MSG_MIN = msg_t'(-(2**(MSG_W-1)) + 1);  // symmetric range

  // Sizes of the space-time graph for distance d.
  function automatic int cn_per_round(input int d);
    return d * (d - 1);
  endfunction
  function automatic int vn_per_round(input int d);
    return d * d + (d - 1) * (d - 1);
  endfunction
  function automatic int num_cn(input int d);
    return d * cn_per_round(d);
  endfunction
  function automatic int num_vn(input int d);
    return d * vn_per_round(d) + num_cn(d);
  endfunction

  // Which of the two edges of a VN a bank carries. Every VN has at most two
  // CNs: bank 0/2/5 is its "first" edge (slot 0), bank 1/3/4 its second.
  function automatic logic bank_slot(input int bank);
    return (bank == 1 || bank == 3 || bank == 4);
  endfunction

  typedef struct packed {
    logic        valid;
    logic [31:0] idx;
  } vn_ref_t;

  // CN-to-VN mapping (the paper's Table III). is_z selects H_Z instead of H_X.
  function automatic vn_ref_t cn_vn(input logic is_z, input int d, input int i,
                                    input int bank);
    vn_ref_t r;
    int m, n, t, j, first;
    logic ok;
    m = cn_per_round(d);
    n = vn_per_round(d);
    r.valid = 1'b0;
    r.idx   = '0;
    if (d < 2 || i < 0 || i >= num_cn(d)) return r;
    t = i / m;
    j = i % m;
    ok = 1'b1;
    first = 0;
    case (bank)
      0, 1: begin
        first = is_z ? (j + j / (d - 1) + t * n) : (j + t * n);
        if (bank == 1) first = first + (is_z ? 1 : d);
      end
      2, 3: begin
        if (!is_z) begin
          first = d * d + j - 1 - j / d + t * n;
          if (bank == 2 && (j % d) == 0)     ok = 1'b0;
          if (bank == 3 && (j % d) == d - 1) ok = 1'b0;
          if (bank == 3) first = first + 1;
        end else begin
          first = d * d + j - d + 1 + t * n;
          if (bank == 2 && (j / (d - 1)) == 0)     ok = 1'b0;
          if (bank == 3 && (j / (d - 1)) == d - 1) ok = 1'b0;
          if (bank == 3) first = first + (d - 1);
        end
      end
      4: begin
        first = d * n + i - m;
        if (t == 0) ok = 1'b0;   // no measurement column before round 0
      end
      default: first = d * n + i;   // bank 5
    endcase
    r.valid = ok;
    r.idx   = ok ? 32'(first) : '0;
    return r;
  endfunction

  // Saturating helpers on messages.
  function automatic msg_t sat_msg(input logic signed [15:0] x);
    if (x > 16'(MSG_MAX)) return MSG_MAX;
    if (x < 16'(MSG_MIN)) return MSG_MIN;
    return msg_t'(x);
  endfunction

  function automatic logic [MSG_W-1:0] abs_msg(input msg_t x);
    logic signed [MSG_W:0] w;
    w = (MSG_W+1)'(x);
    if (w < 0) w = -w;
    if (w > (MSG_W+1)'(MSG_MAX)) w = (MSG_W+1)'(MSG_MAX);
    return w[MSG_W-1:0];
  endfunction

endpackage
