// vl_addr_decode: splits a device-memory physical address that targets the
// Virtual-Link routing device into its fields.
//
// Field layout (follows the paper's address figure), with N the top bit of
// the SQI field and J the top bit of the VLRD-id field:
//   PA[51:J+1]  PA space   - the region of the address map given to VLRDs
//   PA[J:N+1]   VLRD id    - which routing device serves the queue
//   PA[N:18]    SQI        - shared queue identifier (linkTab row)
//   PA[17:12]   page       - page number within one SQI's mapping
//   PA[11:0]    offset     - 64-byte aligned endpoint offset in the page
// With the default 64 SQIs N = 23 and J = 27. The paper's worked example
// (16 SQIs gives N = 22, J = 26) keeps a 4-bit VLRD id, which is kept here.
// The PA-space value and this device's id are this design's choice.
//
// Purely combinational; `hit` is high when both the PA space and the
// VLRD id match this device.
module vl_addr_decode
  import vl_pkg::*;
#(
  parameter int unsigned SQI_W     = VL_SQI_W,
  parameter int unsigned ID_W      = VL_VLRD_ID_W,
  parameter int unsigned J         = VL_SQI_LSB + SQI_W + ID_W - 1,
  parameter logic [VL_PA_W-2-J:0] PA_SPACE = 'h20,   // 0x20 << 28 = 8 GiB
  parameter logic [ID_W-1:0]      VLRD_ID  = '0
) (
  input  vl_pa_t            pa,
  output logic              hit,
  output logic [SQI_W-1:0]  sqi,
  output logic [ID_W-1:0]   vlrd_id,
  output logic [5:0]        page,
  output logic [11:0]       offset
);
  localparam int unsigned N = VL_SQI_LSB + SQI_W - 1;

  always_comb begin
    sqi     = pa[N:VL_SQI_LSB];
    vlrd_id = pa[J:N+1];
    page    = pa[17:12];
    offset  = pa[11:0];
    hit     = (pa[VL_PA_W-1:J+1] == PA_SPACE) && (vlrd_id == VLRD_ID);
  end
endmodule
