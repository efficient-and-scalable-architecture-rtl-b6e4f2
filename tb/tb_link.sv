// tb_link: behavioural model of one chip-to-chip link (transmit PHY, cable,
// receive PHY) for simulation. Not synthesizable logic of the design: the
// real link is a vendor serial-link core and an optical/copper cable.
//
// Data groups entering at in_valid/in_data leave at out_valid/out_data
// exactly lat cycles later (lat = 1..MAXLAT, may be changed only while the
// link is empty). Credits returned by the receiver (cr_in) travel back to
// the sender (cr_out) with the same delay. lat plays the role of
// lambda_PHY, the transmission-to-reception latency.
module tb_link
  import sb_pkg::*;
#(
  parameter int unsigned PC     = 8,
  parameter int unsigned MAXLAT = 256
) (
  input  logic                clk,
  input  int unsigned         lat,
  input  logic                in_valid,
  input  xval_t [PC-1:0]      in_data,
  output logic                out_valid,
  output xval_t [PC-1:0]      out_data,
  input  logic                cr_in,
  output logic                cr_out
);
  logic           v_line  [MAXLAT];
  xval_t [PC-1:0] d_line  [MAXLAT];
  logic           c_line  [MAXLAT];
  int unsigned    wp = 0;

  initial begin
    for (int i = 0; i < MAXLAT; i++) begin
      v_line[i] = 1'b0;
      c_line[i] = 1'b0;
      d_line[i] = '0;
    end
  end

  // slot wp is written now and read back lat cycles later
  always_comb begin
    int unsigned rp;
    rp        = (wp + MAXLAT - lat) % MAXLAT;
    out_valid = v_line[rp];
    out_data  = d_line[rp];
    cr_out    = c_line[rp];
  end

  always_ff @(posedge clk) begin
    v_line[wp] <= in_valid;
    d_line[wp] <= in_data;
    c_line[wp] <= cr_in;
    wp         <= (wp + 1) % MAXLAT;
  end
endmodule
