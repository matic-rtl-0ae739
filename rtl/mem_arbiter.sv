// mem_arbiter: gives the single port of the shared data memory to either the
// microcontroller (port u) or the NPU (port n). The microcontroller has fixed
// priority, so its accesses never wait; the NPU holds its request until gnt.
// Both ports are request/grant: a granted read returns rdata in the next
// cycle, on the port that was granted. The priority choice is this design's.
//
// Timing: combinational grant in the request cycle; memory read latency 1.
module mem_arbiter #(
  parameter int unsigned AW = 11,
  parameter int unsigned DW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // microcontroller
  input  logic          u_req,
  input  logic          u_we,
  input  logic [AW-1:0] u_addr,
  input  logic [DW-1:0] u_wdata,
  output logic          u_gnt,
  output logic [DW-1:0] u_rdata,
  // NPU
  input  logic          n_req,
  input  logic          n_we,
  input  logic [AW-1:0] n_addr,
  input  logic [DW-1:0] n_wdata,
  output logic          n_gnt,
  output logic [DW-1:0] n_rdata,
  // memory
  output logic          m_en,
  output logic          m_we,
  output logic [AW-1:0] m_addr,
  output logic [DW-1:0] m_wdata,
  input  logic [DW-1:0] m_rdata,
  // observation
  output logic [31:0]   conflicts
);
  assign u_gnt   = u_req;
  assign n_gnt   = n_req && !u_req;
  assign m_en    = u_req || n_req;
  assign m_we    = u_req ? u_we    : n_we;
  assign m_addr  = u_req ? u_addr  : n_addr;
  assign m_wdata = u_req ? u_wdata : n_wdata;
  // read data goes to both; each requester uses it only after its own grant
  assign u_rdata = m_rdata;
  assign n_rdata = m_rdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) conflicts <= '0;
    else if (u_req && n_req) conflicts <= conflicts + 1;

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) !(u_gnt && n_gnt));
endmodule
