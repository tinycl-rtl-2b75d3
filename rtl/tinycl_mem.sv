// tinycl_mem: on-chip SRAM model used for every data memory of TinyCL
// (training data, partial feature, kernel and the two gradient memories).
//
// A word holds LANES lanes of 16 bits, one per channel (128 bits for 8
// lanes, the port width the architecture uses to read 8 features at a time).
// NRD synchronous read ports: the data of an address presented with rd_en
// in one cycle is on rd_data in the next and holds until the next read.
// NWR write ports, each with a per-lane enable so that a single channel of a
// pixel can be written. A read of a word written in the same cycle returns
// the old contents; if two write ports hit the same lane of the same word,
// the higher-numbered port wins (the processing unit never does this).
// The number of ports per memory is this implementation's choice: the
// architecture fetches 3 pixels per cycle for the sliding window and 8 for
// the dense layers, and keeps its SRAM split into per-channel blocks to do
// so; here that is modelled as a multi-ported array. Contents are not reset.
module tinycl_mem
  import tinycl_pkg::*;
#(
  parameter int unsigned LANES_N = 8,
  parameter int unsigned DEPTH   = 1024,
  parameter int unsigned NRD     = 1,
  parameter int unsigned NWR     = 1,
  localparam int unsigned MW     = DW * LANES_N,
  localparam int unsigned MAW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                         clk,
  input  logic [NRD-1:0]               rd_en,
  input  logic [MAW-1:0]               rd_addr [NRD],
  output logic [MW-1:0]                rd_data [NRD],
  input  logic [NWR-1:0][LANES_N-1:0]  wr_be,
  input  logic [MAW-1:0]               wr_addr [NWR],
  input  logic [MW-1:0]                wr_data [NWR]
);

  logic [MW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
    end
    for (int p = 0; p < NWR; p++) begin
      for (int l = 0; l < LANES_N; l++) begin
        if (wr_be[p][l]) mem[wr_addr[p]][l*DW +: DW] <= wr_data[p][l*DW +: DW];
      end
    end
  end

endmodule
