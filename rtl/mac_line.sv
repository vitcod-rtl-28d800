// mac_line: a ViTCoD MAC line, MACS MACs (8 in the paper) sharing one mode.
//
// Inter-PE mode (intra = 0): the partial sum ripples from MAC 0 to the last
// MAC, so dot = psum_in + sum(a[m]*b[m]); this is how the line multiplies an
// 8-feature slice of a Q row by the stationary K row. Intra-PE mode
// (intra = 1): each MAC accumulates its own product into acc[m] on every
// enabled cycle (clr restarts from zero); this holds 8 output features of one
// V' row while S.V runs output-stationary. The line has no internal pipeline:
// dot is combinational, acc changes at the clock edge.
module mac_line
  import vitcod_pkg::*;
#(
  parameter int unsigned MACS_P = MACS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     intra,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] a   [MACS_P],
  input  logic signed [B_W-1:0]    b   [MACS_P],
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  dot,
  output logic signed [ACC_W-1:0]  acc [MACS_P]
);
  logic signed [ACC_W-1:0] chain [MACS_P+1];
  assign chain[0] = psum_in;

  for (genvar m = 0; m < MACS_P; m++) begin : g_mac
    mac_pe #(.A_W(DATA_W), .B_W(B_W), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .en, .intra, .clr,
      .a(a[m]), .b(b[m]),
      .psum_in(chain[m]), .psum_out(chain[m+1]), .acc(acc[m])
    );
  end

  assign dot = chain[MACS_P];
endmodule
