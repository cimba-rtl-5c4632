// la_pkg: constants of the LookAround (LA) CRF decoder.
//
// The basecaller's last layer produces, per timestep, 20 transition scores for a CRF with
// state length 1: 4 states (the last base A, C, G or T) and 5 ways of reaching each state
// (staying, written as a blank, or arriving from one of the 4 states). The scores are
// laid out as 4 rows of 5, row d holding the transitions that end in state d.
//
// SRC_IDX and SRC_GRP are the two index tables printed in the decoder's block diagram:
//   SRC_IDX (printed as "Lookahead", 4 rows of 5): for transition k, the state it starts
//     from. Row d is {d, 0, 1, 2, 3}: position 0 is the stay in d, position j > 0 comes
//     from state j-1.
//   SRC_GRP (printed as "Lookbehind", 5 rows of 4, stored here by column): column c lists
//     the five transitions that start from state c.
// The state a transition ends in is its row, k / 5. The printed tables coincide with the
// index tables of the Bonito CRF code for state length 1, which is how their use here
// (SRC_IDX to expand per-state values over transitions, SRC_GRP to gather the transitions
// leaving a state) was decided; the diagram itself does not say which half reads which.
package la_pkg;

  localparam int N_ST  = 4;   // states
  localparam int N_TR  = 20;  // transitions per timestep
  localparam int N_GRP = 5;   // transitions entering (or leaving) one state

  typedef int tr_tab_t [N_TR];
  typedef int grp_tab_t [N_ST][N_GRP];

  localparam tr_tab_t SRC_IDX = '{0, 0, 1, 2, 3,
                                  1, 0, 1, 2, 3,
                                  2, 0, 1, 2, 3,
                                  3, 0, 1, 2, 3};

  localparam grp_tab_t SRC_GRP = '{'{ 0, 1,  6, 11, 16},
                                   '{ 5, 2,  7, 12, 17},
                                   '{10, 3,  8, 13, 18},
                                   '{15, 4,  9, 14, 19}};

  // state a transition ends in
  function automatic int dst_of(input int k);
    return k / N_GRP;
  endfunction

endpackage
