// tb_acceltran_full: the same end-to-end run as tb_acceltran_top, with acceltran_top at its
// default size (AccelTran-Edge: 64 PEs of 16 MAC lanes and 4 softmax units, 4 MB / 8 MB /
// 1 MB buffers). The program and all checks are in acceltran_e2e.
module tb_acceltran_full;
  acceltran_e2e #(.FULL(1'b1)) u_e2e ();
endmodule
