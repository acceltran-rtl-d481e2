// main_memory_model: behavioural stand-in for the accelerator's main memory (LP-DDR3 for
// the edge configuration, monolithic-3D RRAM for the server configuration). It is not
// synthesisable and not part of the design; the RTL brings the memory port out as ports.
//
// Storage is sparse (an associative array of zero-free words, unwritten words read as all
// zero), so any 32-bit word address may be used. Reads: one request per cycle is accepted
// while rd_ready (which drops at random when STALL_PCT > 0, modelling refresh and bank
// conflicts); data returns in order LAT cycles later on rsp_valid. Writes: accepted on
// wr_valid && wr_ready, wr_ready also drops at random. LAT and STALL_PCT are test choices; the
// bandwidth ratio of LP-DDR3 (25.6 GB/s) and RRAM (256 GB/s) can be mimicked with them.
// Testbenches preload and inspect words through the mem array by hierarchical reference.
module main_memory_model
  import acceltran_pkg::*;
#(
  parameter int unsigned LAT       = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            rd_valid,
  output logic            rd_ready,
  input  logic [MADW-1:0] rd_addr,
  output logic            rsp_valid,
  output sword_t          rsp_data,
  input  logic            wr_valid,
  output logic            wr_ready,
  input  logic [MADW-1:0] wr_addr,
  input  sword_t          wr_data
);
  sword_t mem [int unsigned];
  logic   pv [LAT];
  sword_t pd [LAT];
  int     n_reads = 0, n_writes = 0;

  function automatic sword_t peek(input logic [MADW-1:0] a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
      rd_ready <= 1'b0;
      wr_ready <= 1'b0;
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= rd_valid && rd_ready;
      pd[0] <= peek(rd_addr);
      if (rd_valid && rd_ready) n_reads++;
      if (wr_valid && wr_ready) begin mem[wr_addr] = wr_data; n_writes++; end
      rd_ready <= ($urandom_range(0, 99) >= STALL_PCT);
      wr_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    end
  end
endmodule
