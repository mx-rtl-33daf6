// spatz_mx: one MX-ready vector processing unit.
//
// Wires the controller, the vector load/store unit, the vector register file and the
// vector functional unit together. The scalar core offloads decoded operations through
// off_valid_i/off_ready_o/off_req_i; the controller dispatches them in order to the VLSU
// (memory operations) or the VFU (arithmetic), holding back operations whose registers
// are still in use by the other unit. The VLSU reaches memory through four ports
// (request/grant, read data one cycle after the grant) and writes loaded elements into
// the register file through write port 1; stores read it through read port 3. The VFU
// reads its A, B and C/D operands through read ports 0-2 and writes results through
// write port 0.
//
// The observation outputs (hazard_stall_o, vlsu_stall_o, fpu_issue_o) are for
// performance counting and have no effect on the function.
module spatz_mx (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          off_valid_i,
  output logic                          off_ready_o,
  input  mx_pkg::offload_req_t          off_req_i,
  output logic                          busy_o,
  output logic [3:0]                    mem_req_o,
  input  logic [3:0]                    mem_gnt_i,
  output logic [3:0][mx_pkg::AW-1:0]    mem_addr_o,
  output logic [3:0]                    mem_we_o,
  output logic [3:0][63:0]              mem_wdata_o,
  input  logic [3:0]                    mem_rvalid_i,
  input  logic [3:0][63:0]              mem_rdata_i,
  output logic                          hazard_stall_o,
  output logic                          vlsu_stall_o,
  output logic [3:0]                    fpu_issue_o
);
  import mx_pkg::*;

  logic      vlsu_valid, vlsu_ready, vlsu_done, vfu_valid, vfu_ready, vfu_done;
  vlsu_req_t vlsu_req;
  vfu_req_t  vfu_req;

  logic [3:0][4:0]  rd_addr;
  vword_t [3:0]     rd_data;
  logic [1:0]       wr_en;
  logic [1:0][4:0]  wr_addr;
  logic [1:0][7:0]  wr_mask;
  vword_t [1:0]     wr_data;

  spatz_controller i_ctrl (
    .clk_i, .rst_ni,
    .off_valid_i, .off_ready_o, .off_req_i,
    .vlsu_valid_o(vlsu_valid), .vlsu_ready_i(vlsu_ready), .vlsu_req_o(vlsu_req),
    .vlsu_done_i(vlsu_done),
    .vfu_valid_o(vfu_valid), .vfu_ready_i(vfu_ready), .vfu_req_o(vfu_req),
    .vfu_done_i(vfu_done),
    .busy_o, .hazard_stall_o);

  spatz_vlsu #(.N_PORTS(4)) i_vlsu (
    .clk_i, .rst_ni,
    .req_valid_i(vlsu_valid), .req_ready_o(vlsu_ready), .req_i(vlsu_req), .done_o(vlsu_done),
    .stall_o(vlsu_stall_o),
    .mem_req_o, .mem_gnt_i, .mem_addr_o, .mem_we_o, .mem_wdata_o, .mem_rvalid_i, .mem_rdata_i,
    .vrf_rd_addr_o(rd_addr[3]), .vrf_rd_data_i(rd_data[3]),
    .vrf_wr_en_o(wr_en[1]), .vrf_wr_addr_o(wr_addr[1]), .vrf_wr_mask_o(wr_mask[1]),
    .vrf_wr_data_o(wr_data[1]));

  spatz_vrf #(.NR_VREGS(NR_VREGS), .NR_RD(4), .NR_WR(2)) i_vrf (
    .clk_i, .rst_ni,
    .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_mask_i(wr_mask), .wr_data_i(wr_data));

  spatz_vfu #(.N_FPU(N_FPU), .LAT(FPU_LAT)) i_vfu (
    .clk_i, .rst_ni,
    .req_valid_i(vfu_valid), .req_ready_o(vfu_ready), .req_i(vfu_req), .done_o(vfu_done),
    .vrf_rd_addr_o(rd_addr[2:0]), .vrf_rd_data_i(rd_data[2:0]),
    .vrf_wr_en_o(wr_en[0]), .vrf_wr_addr_o(wr_addr[0]), .vrf_wr_mask_o(wr_mask[0]),
    .vrf_wr_data_o(wr_data[0]),
    .fpu_issue_o);

endmodule
