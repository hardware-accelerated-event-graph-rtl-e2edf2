// egnn_pkg: constants shared by the event-graph accelerator.
//
// The defaults describe the base model: 700 cochlea channels, channel
// radius r_ch = 100, skip step s = 10, time radius r_t = 20 ms, four graph
// convolutions of 64 outputs, 16-bit first layer and 8-bit later layers,
// which are the numbers of the published design. The timestamp unit
// (1 us) and the 24-bit timestamp width are this design's own choice.
package egnn_pkg;

  parameter int unsigned N_CH     = 700;     // cochlea channels
  parameter int unsigned CH_W     = 10;      // bits of a channel index
  parameter int unsigned TS_W     = 24;      // bits of a timestamp (1 us units)
  parameter int unsigned R_CH     = 100;     // channel search radius
  parameter int unsigned SKIP     = 10;      // skip step along the channel axis
  parameter int unsigned R_T      = 20000;   // time radius, 20 ms in us
  parameter int unsigned N_NB     = 2 * (R_CH / SKIP) + 1;  // candidate neighbours, 21
  parameter int unsigned FEAT0_W  = 16;      // width of the generator's features
  parameter int unsigned DIV_W    = 32;      // divider width (32 cycles)

  // Number of neighbour candidates for a given radius and skip step.
  function automatic int unsigned n_nb(input int unsigned r_ch, input int unsigned skip);
    return 2 * (r_ch / skip) + 1;
  endfunction

  // Bit width needed to hold values 0..n-1 (at least 1).
  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
