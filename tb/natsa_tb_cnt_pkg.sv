// natsa_tb_cnt_pkg -- event counters shared by the NATSA end-to-end testbench
// and the monitors it binds into the design (natsa_pu_mon, natsa_dispatch_mon).
package natsa_tb_cnt_pkg;
  int n_init;        // DPU results loaded into a q register
  int n_update;      // DPUU results loaded into a q register
  int n_masked;      // distance steps with at least one lane past the matrix edge
  int n_take;        // lane-0 column PUU replaced the profile entry
  int n_keep;        // lane-0 column PUU kept the profile entry
  int n_flat;        // lane-0 distances from a flat window
  int n_lo_end;      // groups handed out from the long end of the partition
  int n_hi_end;      // groups handed out from the short end
  int pu_groups [16];
endpackage
