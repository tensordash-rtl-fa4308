// td_pkg: types and constants shared by the sparse-operand processing element.
//
// The processing element (PE) multiplies LANES pairs of operands per cycle and
// sums them into one accumulator. Operands wait in a staging window of DEPTH
// rows (step +0 is the dense schedule, +1 and +2 are the next two steps). Each
// lane's multiplier input is an 8-way multiplexer over a fixed "promotion map"
// of window positions; the map and its priority order are the ones the design
// is built around (dense, two lookahead and five lookaside moves):
//   option 0:(+0,i) 1:(+1,i) 2:(+2,i) 3:(+1,i-1) 4:(+1,i+1) 5:(+2,i-2)
//          6:(+2,i+2) 7:(+1,i-3), lane indices wrapping modulo LANES.
// The 3-bit movement select MS equals the option number. The lanes are
// scheduled in six levels, {0,5,10},{1,6,11},{2,7,12},{3,8,13},{4,9,14},{15};
// lanes of one level can never pick the same window position.
package td_pkg;

  localparam int LANES   = 16;  // MACs per PE
  localparam int DEPTH   = 3;   // staging-window rows (lookahead 2)
  localparam int NOPT    = 8;   // multiplexer inputs per multiplier input
  localparam int MSW     = 3;   // width of a movement select
  localparam int ASW     = 2;   // width of the advance (rows drained) count
  localparam int NLEVELS = 6;   // scheduler levels

  typedef logic [31:0] fp32_t;
  typedef fp32_t [LANES-1:0] row_t;                 // one 16-value row
  typedef logic [LANES-1:0] lane_mask_t;
  typedef lane_mask_t [DEPTH-1:0] window_mask_t;    // one bit per window slot
  typedef row_t [DEPTH-1:0] window_t;               // the staging window
  typedef logic [MSW-1:0] ms_t;

  // Event counters a tile keeps for one operation.
  typedef struct packed {
    logic [31:0] cycles;      // scheduling steps taken
    logic [31:0] lookahead;   // lane picks of options 1..2
    logic [31:0] lookaside;   // lane picks of options 3..7
    logic [31:0] multi_adv;   // steps that drained two or three rows
    logic [31:0] row_waits;   // row-steps where a row could have drained more
    logic [31:0] macs;        // multiplier operations performed by all PEs
  } tile_stats_t;

  // Window row (time step) reached by each option.
  function automatic int opt_step(input int o);
    case (o)
      0: return 0;
      1, 3, 4, 7: return 1;
      default: return 2;
    endcase
  endfunction

  // Lane offset of each option, relative to the lane doing the selecting.
  function automatic int opt_offset(input int o);
    case (o)
      3: return -1;
      4: return 1;
      5: return -2;
      6: return 2;
      7: return -3;
      default: return 0;
    endcase
  endfunction

  // Source lane of option o for lane i, wrapping around the ends.
  function automatic int opt_lane(input int i, input int o);
    return (i + opt_offset(o) + LANES) % LANES;
  endfunction

  // Scheduler level of each lane.
  function automatic int lane_level(input int i);
    return (i == LANES - 1) ? NLEVELS - 1 : i % 5;
  endfunction

  // Zero test that treats +0 and -0 alike.
  function automatic logic fp_is_zero(input logic [30:0] mag);
    return mag == 31'd0;
  endfunction

endpackage
