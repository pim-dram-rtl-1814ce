// pim_transpose: transpose unit, a DEPTH x WIDTH dual-port SRAM array.
//
// Results leave the special function units one word per clock; the next layer
// needs them bit-transposed (one row per bit, one column per value). Words are
// written horizontally (wr_en/wr_addr/wr_data, word wr_addr) and read out
// vertically (rd_en/rd_bit: bit rd_bit of all DEPTH words, registered into
// rd_data on the next edge). The reverse direction, for data arriving in
// row (bit-plane) form, is the vertical write port wv_en/wv_bit/wv_data and the
// horizontal read port rh_en/rh_addr/rh_data. 256 x 8 is the example size the
// paper gives. Port priority when a horizontal and a vertical write hit the
// same arr in one clock: the vertical write wins (this design's choice).
module pim_transpose #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned BW = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [BW-1:0]    rd_bit,
  output logic [DEPTH-1:0] rd_data,
  input  logic             wv_en,
  input  logic [BW-1:0]    wv_bit,
  input  logic [DEPTH-1:0] wv_data,
  input  logic             rh_en,
  input  logic [AW-1:0]    rh_addr,
  output logic [WIDTH-1:0] rh_data
);
  logic [WIDTH-1:0] arr [DEPTH];
  logic [WIDTH-1:0] vsel;   // bit plane selected by a vertical write

  always_comb
    for (int b = 0; b < int'(WIDTH); b++) vsel[b] = wv_en && (wv_bit == BW'(b));

  // One entry per generate step: each bit takes the vertical write if its
  // plane is selected, else the horizontal write if its entry is addressed.
  for (genvar i = 0; i < int'(DEPTH); i++) begin : g_ent
    logic hsel;
    assign hsel = wr_en && (wr_addr == AW'(i));
    always_ff @(posedge clk) begin
      for (int b = 0; b < int'(WIDTH); b++)
        if (vsel[b])   arr[i][b] <= wv_data[i];
        else if (hsel) arr[i][b] <= wr_data[b];
      if (rd_en) rd_data[i] <= arr[i][rd_bit];
    end
  end

  always_ff @(posedge clk)
    if (rh_en) rh_data <= arr[rh_addr];
endmodule
