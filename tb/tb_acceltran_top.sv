// tb_acceltran_top: end-to-end run of acceltran_top at reduced size (4 PEs, 1,024-word
// activation and weight buffers); the program and all checks are in acceltran_e2e.
module tb_acceltran_top;
  acceltran_e2e #(.FULL(1'b0)) u_e2e ();
endmodule
