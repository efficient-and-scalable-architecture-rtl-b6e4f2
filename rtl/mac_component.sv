// mac_component: the MAC array of the MM module together with the Delta-p
// register (Delta-p_REG).
//
// Each cycle it can take one column group from each ring: PC positions x_j
// and the matching PC columns of J for all PR rows. For every row r it forms
// the 2*PC products J_rj*x_j (a one-bit J only selects +x or -x), sums them
// in an adder tree and adds the sum to the row's accumulator, so that all PR
// rows use a received position in the same cycle and never need it again.
// A ring whose input is not valid contributes nothing that cycle.
//
// clear zeroes the accumulators without copying them (end of a run).
// dump ends an SB step: the accumulators are copied into the output shift
// register and cleared in the same cycle (Delta-p' <- Delta-p, Delta-p <- 0).
// The output register then shifts its contents out, PC values per ring per
// cycle: rows 0,1,2,... of the RingL half (ascending) at out_dp_l and rows
// PR-1,PR-2,... of the RingR half (descending) at out_dp_r, the orders in
// which the TE module processes its own subvectors. out_valid/out_ready is a
// valid/ready handshake; MCE = PR/(2*PC) transfers empty the register.
// dump is only allowed while the output register is empty (checked by an
// assertion).
//
// The array shape (2*PC columns by PR rows, adder tree per row) and a shift
// register rather than a selector for the output follow the paper. The
// paper uses the same registers as accumulators and as the output shift
// register; here the output shift register is a separate copy, so that the
// next step can accumulate while the previous result is still shifting out.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module mac_component
  import sb_pkg::*;
#(
  parameter int unsigned PR = 2048,
  parameter int unsigned PC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid_l,
  input  xval_t [PC-1:0]        in_x_l,
  input  logic [PC*PR-1:0]      in_j_l,
  input  logic                  in_valid_r,
  input  xval_t [PC-1:0]        in_x_r,
  input  logic [PC*PR-1:0]      in_j_r,
  input  logic                  dump,
  input  logic                  clear,
  output logic                  out_valid,
  input  logic                  out_ready,
  output acc_t  [PC-1:0]        out_dp_l,
  output acc_t  [PC-1:0]        out_dp_r,
  output logic                  out_empty
);
  localparam int unsigned HALF = PR / 2;
  localparam int unsigned MCE  = HALF / PC;
  localparam int unsigned CNTW = $clog2(MCE + 1);

  acc_t              acc [PR];   // accumulators
  acc_t              sh  [PR];   // output shift register
  logic [CNTW-1:0]   left;       // groups still to shift out

  assign out_valid = (left != 0);
  assign out_empty = (left == 0);

  for (genvar c = 0; c < PC; c++) begin : g_out
    assign out_dp_l[c] = sh[c];
    assign out_dp_r[c] = sh[PR - PC + c];
  end

  // Adder tree of one row: sum over both rings of +-x.
  function automatic acc_t row_sum(input int r);
    acc_t s;
    s = '0;
    for (int c = 0; c < PC; c++) begin
      if (in_valid_l) s += in_j_l[c*PR + r] ? acc_t'(in_x_l[c]) : -acc_t'(in_x_l[c]);
      if (in_valid_r) s += in_j_r[c*PR + r] ? acc_t'(in_x_r[c]) : -acc_t'(in_x_r[c]);
    end
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < PR; r++) acc[r] <= '0;
    end else begin
      for (int r = 0; r < PR; r++)
        acc[r] <= (dump || clear) ? '0 : acc[r] + row_sum(r);
    end
  end

  logic shift;
  assign shift = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (dump) begin
      for (int r = 0; r < PR; r++) sh[r] <= acc[r];
    end else if (shift) begin
      // RingL half moves towards row 0, RingR half towards row PR-1.
      for (int r = 0; r < HALF; r++)
        sh[r] <= (r + PC < HALF) ? sh[r + PC] : '0;
      for (int r = HALF; r < PR; r++)
        sh[r] <= (r >= HALF + PC) ? sh[r - PC] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     left <= '0;
    else if (dump)  left <= CNTW'(MCE);
    else if (shift) left <= left - 1'b1;
  end

  a_dump_when_empty: assert property (@(posedge clk) disable iff (!rst_n) dump |-> out_empty);

endmodule
