// regfile: architectural integer register file, 32 x XLEN.
//
// Four asynchronous read ports, two for each of the two instructions the issue
// stage considers per cycle, and two synchronous write ports, one per commit
// port. x0 reads as zero and is never written. If both write ports address the
// same register, port 1 (the younger instruction) wins; the issue stage's WAW
// check keeps that from happening with non-cancelled instructions.
module regfile
  import ss_pkg::*;
#(
  parameter int unsigned NR_READ  = NR_RF_RPORTS,
  parameter int unsigned NR_WRITE = NR_COMMIT_PORTS
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [NR_READ-1:0][4:0]  raddr_i,
  output xlen_t [NR_READ-1:0]      rdata_o,
  input  logic [NR_WRITE-1:0]      we_i,
  input  logic [NR_WRITE-1:0][4:0] waddr_i,
  input  xlen_t [NR_WRITE-1:0]     wdata_i
);
  xlen_t regs_q [32];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 32; i++) regs_q[i] <= '0;
    end else begin
      for (int unsigned w = 0; w < NR_WRITE; w++)
        if (we_i[w] && waddr_i[w] != 5'd0) regs_q[waddr_i[w]] <= wdata_i[w];
    end
  end

  always_comb
    for (int unsigned r = 0; r < NR_READ; r++)
      rdata_o[r] = (raddr_i[r] == 5'd0) ? '0 : regs_q[raddr_i[r]];
endmodule
