// tb_local_buffer: random segment-masked writes on two write ports and reads
// on three read ports of a small buffer, compared with a shadow array.
module tb_local_buffer;
  localparam int W = 32, DP = 20, NR = 3, NW = 2, SG = 4;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we [NW]; logic [4:0] waddr [NW]; logic [SG-1:0] wseg [NW]; logic [W-1:0] wdata [NW];
  logic [4:0] raddr [NR]; logic [W-1:0] rdata [NR];
  logic [W-1:0] shadow [DP];
  int checks = 0, failures = 0;

  local_buffer #(.WIDTH(W), .DEPTH(DP), .NR(NR), .NW(NW), .SEGS(SG)) dut (.*);

  initial begin
    for (int p = 0; p < NW; p++) begin we[p] = 1; wseg[p] = '1; end
    for (int d = 0; d < DP; d += 2) begin
      waddr[0] = 5'(d); waddr[1] = 5'(d+1); wdata[0] = $urandom; wdata[1] = $urandom;
      shadow[d] = wdata[0]; shadow[d+1] = wdata[1];
      @(negedge clk);
    end
    for (int n = 0; n < 500; n++) begin
      for (int p = 0; p < NW; p++) begin
        we[p] = $urandom % 2; wseg[p] = SG'($urandom); wdata[p] = $urandom;
      end
      waddr[0] = 5'($urandom % DP);
      waddr[1] = 5'((waddr[0] + 1 + $urandom % (DP-1)) % DP);
      for (int r = 0; r < NR; r++) raddr[r] = 5'($urandom % DP);
      #0.5;
      for (int r = 0; r < NR; r++) begin checks++; if (rdata[r] !== shadow[raddr[r]]) failures++; end
      for (int p = 0; p < NW; p++) if (we[p])
        for (int s = 0; s < SG; s++) if (wseg[p][s]) shadow[waddr[p]][s*8 +: 8] = wdata[p][s*8 +: 8];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
