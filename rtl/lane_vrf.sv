// Vector register file chunk of one lane, with its two crossbars.
//
// The lane's part of the VRF is split into NrBanks single-port (1RW) banks.
// VRF word a sits in bank (a mod NrBanks), row (a / NrBanks): consecutive
// words of a register fall in consecutive banks and there is no barber-pole
// rotation between registers, as in the paper. A crossbar with one
// fixed-priority arbiter per bank connects the NrMasters requesters of the
// lane to the banks (lower master index wins); a second crossbar returns read
// data to the master that asked for it. The bank count and the split VRF follow
// the paper; the priority order and the timing are this design's choices.
//
// Timing: a request is granted combinationally (gnt_o in the same cycle);
// read data appear on rdata_o with rvalid_o one cycle after the grant. Writes
// use a byte enable per byte of the 64-bit word.
module lane_vrf #(
  parameter int unsigned NrBanks   = ara_pkg::NR_BANKS,
  parameter int unsigned NrWords   = ara_pkg::NR_VREGS * ara_pkg::VLEN / 64 / ara_pkg::NR_LANES,
  parameter int unsigned NrMasters = 6,
  localparam int unsigned AddrW    = $clog2(NrWords)
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic [NrMasters-1:0]           req_i,
  input  logic [NrMasters-1:0]           we_i,
  input  logic [NrMasters-1:0][AddrW-1:0] addr_i,
  input  logic [NrMasters-1:0][63:0]     wdata_i,
  input  logic [NrMasters-1:0][7:0]      be_i,
  output logic [NrMasters-1:0]           gnt_o,
  output logic [NrMasters-1:0]           rvalid_o,
  output logic [NrMasters-1:0][63:0]     rdata_o
);
  localparam int unsigned Rows  = NrWords / NrBanks;
  localparam int unsigned BankW = $clog2(NrBanks);
  localparam int unsigned RowW  = $clog2(Rows);
  localparam int unsigned MW    = (NrMasters > 1) ? $clog2(NrMasters) : 1;

  // Per-bank arbitration result.
  logic [NrBanks-1:0]          bank_req;
  logic [NrBanks-1:0][MW-1:0]  bank_sel;

  always_comb begin
    bank_req = '0;
    bank_sel = '0;
    gnt_o    = '0;
    for (int b = 0; b < NrBanks; b++) begin
      for (int m = NrMasters - 1; m >= 0; m--) begin
        if (req_i[m] && (addr_i[m][BankW-1:0] == BankW'(b))) begin
          bank_req[b] = 1'b1;
          bank_sel[b] = MW'(m);
        end
      end
      if (bank_req[b]) gnt_o[bank_sel[b]] = 1'b1;
    end
  end

  // Banks.
  logic [NrBanks-1:0][63:0] bank_rdata;
  logic [NrBanks-1:0]       bank_rd_q;
  logic [NrBanks-1:0][MW-1:0] bank_sel_q;

  for (genvar b = 0; b < NrBanks; b++) begin : gen_bank
    logic [7:0][7:0] mem [Rows];
    logic [RowW-1:0] row;
    logic            we;
    logic [7:0]      be;
    logic [63:0]     wdata;
    assign row   = addr_i[bank_sel[b]][AddrW-1:BankW];
    assign we    = we_i[bank_sel[b]];
    assign be    = be_i[bank_sel[b]];
    assign wdata = wdata_i[bank_sel[b]];
    always_ff @(posedge clk_i) begin
      if (bank_req[b]) begin
        if (we) begin
          for (int i = 0; i < 8; i++) if (be[i]) mem[row][i] <= wdata[8*i +: 8];
        end else begin
          bank_rdata[b] <= mem[row];
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bank_rd_q  <= '0;
      bank_sel_q <= '0;
    end else begin
      for (int b = 0; b < NrBanks; b++) bank_rd_q[b] <= bank_req[b] && !we_i[bank_sel[b]];
      bank_sel_q <= bank_sel;
    end
  end

  // Banks-to-masters crossbar.
  always_comb begin
    rvalid_o = '0;
    rdata_o  = '0;
    for (int b = 0; b < NrBanks; b++) begin
      if (bank_rd_q[b]) begin
        rvalid_o[bank_sel_q[b]] = 1'b1;
        rdata_o[bank_sel_q[b]]  = bank_rdata[b];
      end
    end
  end

  // A master keeps at most one bank busy.
  initial assert (NrWords % NrBanks == 0);

endmodule
