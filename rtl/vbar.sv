// vbar: Vector Crossbar between the HPLE lanes and the VDM banks.
//
// Each lane may present one VDM word access per cycle (a common read/write
// direction for the whole beat). Word address a lives in bank a mod NUM_BANKS
// at row a div NUM_BANKS, so consecutive words stripe across banks. For every
// bank the lowest-numbered requesting lane wins; on a read every other lane
// asking for the same bank and row is served by the same access (this makes
// repeated and broadcast loads collision-free), on a write only the winner is
// served. Lanes not served this cycle (bank collisions) retry. Read data is
// routed back to the served lanes one cycle later, when the banks deliver it.
// The paper gives the VBAR's function and that it is parameterised in banks
// and lanes; the striping, the priority and the multicast are this design's.
module vbar
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLES = 128,
  parameter int unsigned NUM_BANKS = 128,
  parameter int unsigned ROW_W     = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic              lane_req   [NUM_HPLES],
  input  logic [ADDR_W-1:0] lane_addr  [NUM_HPLES],
  input  elem_t             lane_wdata [NUM_HPLES],
  output logic              served     [NUM_HPLES],
  output logic              lane_rvalid[NUM_HPLES],
  output elem_t             lane_rdata [NUM_HPLES],
  // VDM bank side
  output logic              bank_en    [NUM_BANKS],
  output logic              bank_we    [NUM_BANKS],
  output logic [ROW_W-1:0]  bank_row   [NUM_BANKS],
  output elem_t             bank_wdata [NUM_BANKS],
  input  elem_t             bank_rdata [NUM_BANKS]
);
  localparam int unsigned BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  logic [BW-1:0]    lbank [NUM_HPLES];
  logic [ROW_W-1:0] lrow  [NUM_HPLES];
  logic [BW-1:0]    lbank_q [NUM_HPLES];
  logic             winner_found [NUM_BANKS];
  int unsigned      winner [NUM_BANKS];

  always_comb begin
    for (int k = 0; k < NUM_HPLES; k++) begin
      lbank[k] = (NUM_BANKS > 1) ? BW'(lane_addr[k] % NUM_BANKS) : '0;
      lrow[k]  = ROW_W'(lane_addr[k] / NUM_BANKS);
    end
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      winner_found[b] = 1'b0;
      winner[b]       = 0;
      for (int k = NUM_HPLES - 1; k >= 0; k--) begin
        if (lane_req[k] && 32'(lbank[k]) == b) begin
          winner_found[b] = 1'b1;
          winner[b]       = k;
        end
      end
      bank_en[b]    = winner_found[b];
      bank_we[b]    = we;
      bank_row[b]   = lrow[winner[b]];
      bank_wdata[b] = lane_wdata[winner[b]];
    end
  end

  always_comb begin
    for (int k = 0; k < NUM_HPLES; k++) begin
      if (we) served[k] = lane_req[k] && winner[lbank[k]] == k;
      else    served[k] = lane_req[k] && lrow[winner[lbank[k]]] == lrow[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_HPLES; k++) lane_rvalid[k] <= 1'b0;
    end else begin
      for (int k = 0; k < NUM_HPLES; k++) lane_rvalid[k] <= served[k] && !we;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NUM_HPLES; k++) lbank_q[k] <= lbank[k];
  end

  always_comb begin
    for (int k = 0; k < NUM_HPLES; k++) lane_rdata[k] = bank_rdata[lbank_q[k]];
  end
endmodule
