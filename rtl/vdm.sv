// vdm: Vector Data Memory, the RPU's banked vector scratchpad.
//
// NUM_BANKS single-port banks of 128-bit words, BANK_DEPTH words each; the
// default 128 x 2048 words is the paper's 4 MiB VDM with 128 banks. Each bank
// is driven by the vector crossbar; when the crossbar leaves a bank idle, the
// host/HBM port may use it (word address a is bank a mod NUM_BANKS, row
// a div NUM_BANKS). Reads are synchronous with one cycle of latency on both
// sides. The banks stand in for the SRAM macros of the physical design; the
// host-port arrangement is this design's choice.
module vdm
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_BANKS  = 128,
  parameter int unsigned BANK_DEPTH = 2048,
  parameter int unsigned ROW_W      = (BANK_DEPTH > 1) ? $clog2(BANK_DEPTH) : 1
) (
  input  logic              clk,
  input  logic              bank_en    [NUM_BANKS],
  input  logic              bank_we    [NUM_BANKS],
  input  logic [ROW_W-1:0]  bank_row   [NUM_BANKS],
  input  elem_t             bank_wdata [NUM_BANKS],
  output elem_t             bank_rdata [NUM_BANKS],
  input  logic              host_en,
  input  logic              host_we,
  input  logic [ADDR_W-1:0] host_addr,
  input  elem_t             host_wdata,
  output elem_t             host_rdata
);
  localparam int unsigned BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  logic [BW-1:0]    hbank, hbank_q;
  logic [ROW_W-1:0] hrow;
  assign hbank = (NUM_BANKS > 1) ? BW'(host_addr % NUM_BANKS) : '0;
  assign hrow  = ROW_W'(host_addr / NUM_BANKS);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    elem_t            mem [BANK_DEPTH];
    logic             en, we;
    logic [ROW_W-1:0] row;
    elem_t            wd;
    always_comb begin
      if (bank_en[b]) begin
        en = 1'b1; we = bank_we[b]; row = bank_row[b]; wd = bank_wdata[b];
      end else begin
        en = host_en && (32'(hbank) == b); we = host_we; row = hrow; wd = host_wdata;
      end
    end
    always_ff @(posedge clk) begin
      if (en && we)  mem[row] <= wd;
      if (en && !we) bank_rdata[b] <= mem[row];
    end
  end

  always_ff @(posedge clk) hbank_q <= hbank;
  assign host_rdata = bank_rdata[hbank_q];
endmodule
