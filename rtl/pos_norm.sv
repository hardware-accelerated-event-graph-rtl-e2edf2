// pos_norm: positional normalisation (PN) of one edge, quantised.
//
// Edge positions are relative: the channel offset k*SKIP lies in
// [-R_CH, R_CH] and the time difference P_j - P_i in [-R_T, 0]. The published
// design rescales both to (0,1) before they enter the linear layer: time by
// multiplying with -1/r_t, channel by adding r_ch and scaling. Here the
// values are produced directly as unsigned Q-bit integers (full scale
// 2^Q - 1 stands for 1.0), the quantised form in which a layer stores its
// inputs:
//   pn_ch = round((k*SKIP + R_CH) / (2*R_CH) * (2^Q-1))  - a look-up table of
//           the 2*R_CH/SKIP+1 possible offsets, built at elaboration;
//   pn_t  = (tdiff * M) >> 24, M = floor((2^Q-1) * 2^24 / R_T), saturated;
//           tdiff = t_i - t_j >= 0 is the time by which the neighbour is older.
// The text multiplies the channel term by 2/r_ch, which would give (0,2);
// this block divides by 2*r_ch so that the range is (0,1) as the text states.
// Table for few values, multiply-and-shift for many: that split follows the
// paper's description of its scaling. Purely combinational.
module pos_norm #(
  parameter int unsigned R_CH = egnn_pkg::R_CH,
  parameter int unsigned SKIP = egnn_pkg::SKIP,
  parameter int unsigned R_T  = egnn_pkg::R_T,
  parameter int unsigned Q    = 16,
  localparam int unsigned NB   = 2 * (R_CH / SKIP) + 1,
  localparam int unsigned K_W  = $clog2(NB + 1),
  localparam int unsigned TD_W = $clog2(R_T + 1)
) (
  input  logic [K_W-1:0]  k,       // candidate index, offset (k - R_CH/SKIP)*SKIP
  input  logic [TD_W-1:0] tdiff,
  output logic [Q-1:0]    pn_ch,
  output logic [Q-1:0]    pn_t
);
  localparam longint unsigned FS = (64'd1 << Q) - 1;
  localparam longint unsigned M  = (FS << 24) / 64'(R_T);
  localparam int unsigned     PW = TD_W + 64;

  typedef logic [Q-1:0] lut_t [NB];

  function automatic lut_t make_lut();
    lut_t l;
    for (int unsigned n = 0; n < NB; n++) begin
      longint unsigned num;
      num  = longint'(n) * SKIP * FS;         // (k*SKIP + R_CH) * FS, k = n - HALF
      l[n] = Q'((2 * num + 2 * R_CH) / (4 * R_CH));   // round(num / (2*R_CH))
    end
    return l;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [PW-1:0] prod;
  always_comb begin
    pn_ch = (32'(k) < NB) ? LUT[k] : '1;
    prod  = (PW'(tdiff) * PW'(M)) >> 24;
    pn_t  = (prod > PW'(FS)) ? '1 : Q'(prod);
  end
endmodule
