// variable_registers: the solver's scalar variable store.
//
// Holds the BiCGStab scalars named by the source - alpha, beta, omega, rho,
// rho_new and conv_threshold - plus the working values this design keeps
// next to them (norm, two dot-product results and one temporary; see
// solver_pkg::var_e). Two asynchronous read ports and one write port;
// writes take effect at the clock edge. Reset and 'init' load
// alpha = omega = rho = 1.0 (the usual BiCGStab start, which keeps the first
// beta finite) and all other registers 0.0.
module variable_registers (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic              we,
  input  solver_pkg::var_e  waddr,
  input  fp64_pkg::fp64_t   wdata,
  input  solver_pkg::var_e  raddr_a,
  output fp64_pkg::fp64_t   rdata_a,
  input  solver_pkg::var_e  raddr_b,
  output fp64_pkg::fp64_t   rdata_b
);
  import fp64_pkg::*;
  import solver_pkg::*;
  fp64_t regs [NUM_VARS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_VARS; i++) regs[i] <= FP64_ZERO;
      regs[V_ALPHA] <= FP64_ONE;
      regs[V_OMEGA] <= FP64_ONE;
      regs[V_RHO]   <= FP64_ONE;
    end else if (init) begin
      for (int i = 0; i < NUM_VARS; i++) regs[i] <= FP64_ZERO;
      regs[V_ALPHA] <= FP64_ONE;
      regs[V_OMEGA] <= FP64_ONE;
      regs[V_RHO]   <= FP64_ONE;
    end else if (we && int'(waddr) < NUM_VARS) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata_a = (int'(raddr_a) < NUM_VARS) ? regs[raddr_a] : FP64_ZERO;
  assign rdata_b = (int'(raddr_b) < NUM_VARS) ? regs[raddr_b] : FP64_ZERO;
endmodule
