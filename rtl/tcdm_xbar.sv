// tcdm_xbar: interconnect between the cluster's memory ports and its TCDM banks.
//
// Any of NR_MASTERS ports can reach any of NR_BANKS banks. Memory is interleaved word by
// word: byte address bits [2:0] select the byte in a 64-bit word, the next log2(NR_BANKS)
// bits the bank and the bits above that the word inside the bank. Each bank serves one
// request per cycle; when several ports want the same bank a round-robin arbiter of that
// bank picks one (starting after the port it granted last) and the others see no grant
// and keep asking. A granted port gets rvalid one cycle later, with the read data of the
// bank it used (for a write the data is meaningless).
//
// The paper only states that the cluster shares 16 SRAM banks; the interleaving and the
// arbitration policy are this design's choices.
module tcdm_xbar #(
  parameter int unsigned NR_MASTERS = 10,
  parameter int unsigned NR_BANKS   = 16,
  parameter int unsigned BANK_AW    = 10
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  logic [NR_MASTERS-1:0]                  m_req_i,
  output logic [NR_MASTERS-1:0]                  m_gnt_o,
  input  logic [NR_MASTERS-1:0][mx_pkg::AW-1:0]  m_addr_i,
  input  logic [NR_MASTERS-1:0]                  m_we_i,
  input  logic [NR_MASTERS-1:0][63:0]            m_wdata_i,
  output logic [NR_MASTERS-1:0]                  m_rvalid_o,
  output logic [NR_MASTERS-1:0][63:0]            m_rdata_o,
  output logic [NR_BANKS-1:0]                    b_req_o,
  output logic [NR_BANKS-1:0]                    b_we_o,
  output logic [NR_BANKS-1:0][BANK_AW-1:0]       b_addr_o,
  output logic [NR_BANKS-1:0][63:0]              b_wdata_o,
  input  logic [NR_BANKS-1:0][63:0]              b_rdata_i
);
  localparam int unsigned BW = $clog2(NR_BANKS);
  localparam int unsigned MW = $clog2(NR_MASTERS);

  logic [NR_MASTERS-1:0][BW-1:0] m_bank;
  always_comb
    for (int unsigned m = 0; m < NR_MASTERS; m++) m_bank[m] = m_addr_i[m][3 +: BW];

  logic [NR_BANKS-1:0][MW-1:0] last_q;      // last master granted, per bank
  logic [NR_BANKS-1:0][MW-1:0] win;
  logic [NR_BANKS-1:0]         any;

  // Per-bank round-robin choice.
  always_comb begin
    m_gnt_o = '0;
    for (int unsigned b = 0; b < NR_BANKS; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int unsigned k = 1; k <= NR_MASTERS; k++) begin
        int unsigned m;
        m = (32'(last_q[b]) + k) % NR_MASTERS;
        if (!any[b] && m_req_i[m] && m_bank[m] == BW'(b)) begin
          any[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      b_req_o[b]   = any[b];
      b_we_o[b]    = m_we_i[win[b]];
      b_addr_o[b]  = m_addr_i[win[b]][3 + BW +: BANK_AW];
      b_wdata_o[b] = m_wdata_i[win[b]];
      if (any[b]) m_gnt_o[win[b]] = 1'b1;
    end
  end

  logic [NR_MASTERS-1:0][BW-1:0] rsp_bank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q     <= '0;
      m_rvalid_o <= '0;
      rsp_bank_q <= '0;
    end else begin
      for (int unsigned b = 0; b < NR_BANKS; b++)
        if (any[b]) last_q[b] <= win[b];
      m_rvalid_o <= m_gnt_o;
      for (int unsigned m = 0; m < NR_MASTERS; m++)
        if (m_gnt_o[m]) rsp_bank_q[m] <= m_bank[m];
    end
  end

  always_comb
    for (int unsigned m = 0; m < NR_MASTERS; m++) m_rdata_o[m] = b_rdata_i[rsp_bank_q[m]];

endmodule
