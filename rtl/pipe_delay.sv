// pipe_delay: DEPTH-stage shift register for a WIDTH-bit bundle.
//
// Used to give the arithmetic cores the pipeline depths the paper reports
// (Table 3: 23 stages for a dyadic core, 50 for an NTT core, 49 for an INTT
// core) and to carry control tags alongside a datapath. Output equals the
// input DEPTH clock edges earlier; DEPTH = 0 is a wire. The register chain
// is reset to zero so that tags leaving it are never random.
module pipe_delay #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q <= '0;
      else        q <= d;
    end
  end else begin : g_regs
    logic [DEPTH-1:0][WIDTH-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else        sr <= {sr[DEPTH-2:0], d};
    end
    assign q = sr[DEPTH-1];
  end
endmodule
