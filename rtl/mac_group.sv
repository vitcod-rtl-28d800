// mac_group: the MAC lines that together cover one 64-feature row.
//
// LPG lines of MACS MACs each (8 x 8 = 64 MACs) are chained so that, in
// inter-PE mode, the partial sum runs through all of them and dot is the full
// Q.K dot product of one query and the stationary key in a single cycle. In
// intra-PE mode every MAC keeps the accumulator of one output feature, so the
// group holds a whole V' row. Feature f sits in line f/8, MAC f%8. Operands are
// packed rows: a_row is D signed bytes, b_row is D values of B_W bits.
module mac_group
  import vitcod_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    intra,
  input  logic                    clr,
  input  logic [ROW_W-1:0]        a_row,
  input  logic [D*B_W-1:0]        b_row,
  output logic signed [ACC_W-1:0] dot,
  output logic [D*ACC_W-1:0]      acc_row
);
  logic signed [ACC_W-1:0] chain [LPG+1];
  assign chain[0] = '0;

  for (genvar l = 0; l < LPG; l++) begin : g_line
    logic signed [DATA_W-1:0] a [MACS];
    logic signed [B_W-1:0]    b [MACS];
    logic signed [ACC_W-1:0]  acc [MACS];
    for (genvar m = 0; m < MACS; m++) begin : g_op
      assign a[m] = a_row[(l*MACS+m)*DATA_W +: DATA_W];
      assign b[m] = b_row[(l*MACS+m)*B_W +: B_W];
      assign acc_row[(l*MACS+m)*ACC_W +: ACC_W] = acc[m];
    end
    mac_line u_line (
      .clk, .rst_n, .en, .intra, .clr,
      .a, .b, .psum_in(chain[l]), .dot(chain[l+1]), .acc
    );
  end

  assign dot = chain[LPG];
endmodule
