// mx_cluster: the Dual-Core MX cluster.
//
// Two MX-ready vector units share a 128 KiB tightly coupled data memory made of 16
// word-interleaved banks of 1024 x 64 bits. Each vector unit has four memory ports; the
// scalar core that drives it has one more. All NR_CORES*5 ports reach every bank through
// one crossbar with per-bank round-robin arbitration, so a bank conflict costs the loser
// one cycle per retry, and read data returns one cycle after the grant.
//
// The scalar cores and their instruction caches are not part of this RTL. For each core
// the top level exposes
//   off_valid_i / off_ready_o / off_req_i   the offload port: decoded vector and MX
//                                           operations with their scalar operands;
//   busy_o                                  the vector unit still has work in flight;
//   scl_*                                   the scalar core's own memory port
//                                           (request/grant, rvalid one cycle later).
// Port c*5+0..3 of the crossbar belongs to vector unit c, port c*5+4 to scalar core c.
// The observation outputs count nothing themselves; they expose hazard stalls, refused
// VLSU requests and busy FPU lanes for performance measurement.
module mx_cluster #(
  parameter int unsigned NR_CORES   = 2,
  parameter int unsigned NR_BANKS   = 16,
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  logic [NR_CORES-1:0]                   off_valid_i,
  output logic [NR_CORES-1:0]                   off_ready_o,
  input  mx_pkg::offload_req_t [NR_CORES-1:0]   off_req_i,
  output logic [NR_CORES-1:0]                   busy_o,
  input  logic [NR_CORES-1:0]                   scl_req_i,
  output logic [NR_CORES-1:0]                   scl_gnt_o,
  input  logic [NR_CORES-1:0][mx_pkg::AW-1:0]   scl_addr_i,
  input  logic [NR_CORES-1:0]                   scl_we_i,
  input  logic [NR_CORES-1:0][63:0]             scl_wdata_i,
  output logic [NR_CORES-1:0]                   scl_rvalid_o,
  output logic [NR_CORES-1:0][63:0]             scl_rdata_o,
  output logic [NR_CORES-1:0]                   hazard_stall_o,
  output logic [NR_CORES-1:0]                   vlsu_stall_o,
  output logic [NR_CORES-1:0][3:0]              fpu_issue_o
);
  import mx_pkg::*;

  localparam int unsigned NM      = NR_CORES * 5;
  localparam int unsigned BANK_AW = $clog2(BANK_WORDS);

  logic [NM-1:0]          m_req, m_gnt, m_we, m_rvalid;
  logic [NM-1:0][AW-1:0]  m_addr;
  logic [NM-1:0][63:0]    m_wdata, m_rdata;

  for (genvar c = 0; c < NR_CORES; c++) begin : g_core
    logic [3:0]         req, gnt, we, rvalid;
    logic [3:0][AW-1:0] addr;
    logic [3:0][63:0]   wdata, rdata;

    spatz_mx i_spatz (
      .clk_i, .rst_ni,
      .off_valid_i(off_valid_i[c]), .off_ready_o(off_ready_o[c]), .off_req_i(off_req_i[c]),
      .busy_o(busy_o[c]),
      .mem_req_o(req), .mem_gnt_i(gnt), .mem_addr_o(addr), .mem_we_o(we),
      .mem_wdata_o(wdata), .mem_rvalid_i(rvalid), .mem_rdata_i(rdata),
      .hazard_stall_o(hazard_stall_o[c]), .vlsu_stall_o(vlsu_stall_o[c]),
      .fpu_issue_o(fpu_issue_o[c]));

    for (genvar p = 0; p < 4; p++) begin : g_port
      assign m_req[c*5+p]   = req[p];
      assign m_addr[c*5+p]  = addr[p];
      assign m_we[c*5+p]    = we[p];
      assign m_wdata[c*5+p] = wdata[p];
      assign gnt[p]         = m_gnt[c*5+p];
      assign rvalid[p]      = m_rvalid[c*5+p];
      assign rdata[p]       = m_rdata[c*5+p];
    end
    assign m_req[c*5+4]   = scl_req_i[c];
    assign m_addr[c*5+4]  = scl_addr_i[c];
    assign m_we[c*5+4]    = scl_we_i[c];
    assign m_wdata[c*5+4] = scl_wdata_i[c];
    assign scl_gnt_o[c]    = m_gnt[c*5+4];
    assign scl_rvalid_o[c] = m_rvalid[c*5+4];
    assign scl_rdata_o[c]  = m_rdata[c*5+4];
  end

  logic [NR_BANKS-1:0]              b_req, b_we;
  logic [NR_BANKS-1:0][BANK_AW-1:0] b_addr;
  logic [NR_BANKS-1:0][63:0]        b_wdata, b_rdata;

  tcdm_xbar #(.NR_MASTERS(NM), .NR_BANKS(NR_BANKS), .BANK_AW(BANK_AW)) i_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_gnt_o(m_gnt), .m_addr_i(m_addr), .m_we_i(m_we), .m_wdata_i(m_wdata),
    .m_rvalid_o(m_rvalid), .m_rdata_o(m_rdata),
    .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr), .b_wdata_o(b_wdata),
    .b_rdata_i(b_rdata));

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i,
      .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .wdata_i(b_wdata[b]),
      .rdata_o(b_rdata[b]));
  end

endmodule
