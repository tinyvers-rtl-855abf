// l2_mem -- the shared level-2 SRAM of TinyVers: 512 kB in two power domains.
//
// The upper 64 kB (byte offsets 0x70000-0x7FFFF) form the LP data-acquisition
// memory, a separately powered domain that stays on in the LP data-acq. mode
// to hold windowed sensor data. The remaining 448 kB form the data-acq.
// memory domain. Each region is split into four word-interleaved banks of
// 32-bit words, eight single-port banks in all; the TCDM interconnect
// addresses them by bank index (0-3 main, 4-7 LP) and row.
//
// Timing: single-cycle access; read data is valid the cycle after the
// request (TCDM response phase). Byte enables apply to writes.
// A bank whose power domain is off (pwr_main_i / pwr_lp_i low) must not be
// accessed; this is checked by an assertion, and reads of it return zero.
//
// From the paper: 512 kB shared L2, 64 kB of it powered separately for the
// LP data-acq. mode, four macro blocks drawn per region, single-cycle TCDM
// access. Own choices: the address map, word interleaving and 32-bit banks.
// Retention loss when a domain is switched off is not modelled.
module l2_mem #(
  parameter int unsigned MAIN_ROWS = 28672,   // 448 kB / 4 banks / 4 bytes
  parameter int unsigned LP_ROWS   = 4096,    //  64 kB / 4 banks / 4 bytes
  parameter int unsigned RW        = 15
) (
  input  logic                 clk_i,
  input  logic                 pwr_main_i,
  input  logic                 pwr_lp_i,
  input  logic [7:0]           req_i,
  input  logic [7:0]           we_i,
  input  logic [7:0][RW-1:0]   row_i,
  input  logic [7:0][31:0]     wdata_i,
  input  logic [7:0][3:0]      be_i,
  output logic [7:0][31:0]     rdata_o
);
  logic [31:0] main_mem [4][MAIN_ROWS];
  logic [31:0] lp_mem   [4][LP_ROWS];

  for (genvar b = 0; b < 4; b++) begin : g_bank
    always_ff @(posedge clk_i) begin
      if (req_i[b]) begin
        if (we_i[b]) begin
          for (int k = 0; k < 4; k++)
            if (be_i[b][k]) main_mem[b][row_i[b]][8*k +: 8] <= wdata_i[b][8*k +: 8];
        end else rdata_o[b] <= pwr_main_i ? main_mem[b][row_i[b]] : '0;
      end
      if (req_i[b+4]) begin
        if (we_i[b+4]) begin
          for (int k = 0; k < 4; k++)
            if (be_i[b+4][k]) lp_mem[b][row_i[b+4][$clog2(LP_ROWS)-1:0]][8*k +: 8]
                                <= wdata_i[b+4][8*k +: 8];
        end else rdata_o[b+4] <= pwr_lp_i ? lp_mem[b][row_i[b+4][$clog2(LP_ROWS)-1:0]] : '0;
      end
    end
  end

  assert property (@(posedge clk_i) !(|req_i[3:0] && !pwr_main_i));
  assert property (@(posedge clk_i) !(|req_i[7:4] && !pwr_lp_i));
endmodule
