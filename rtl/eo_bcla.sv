// eo_bcla: early output dual-rail block carry lookahead adder (BCLA).
//
// The adder is cut into 4-bit sections (sub_bcla4). Carries ripple inside
// a section and are looked ahead between sections by each section's BCLG.
// With REDUNDANT = 1 (the default, the main design) each BCLG passes its
// redundant carry to the next BCLG while its regular carry drives the next
// section's sum chain; the redundant carries reset quickly on the spacer,
// so the reverse latency no longer depends on the data. With REDUNDANT = 0
// the regular carry does both jobs. With RCA_BITS > 0 the low RCA_BITS bits
// are an early output ripple carry adder (eo_rca) whose carry out feeds
// the first section: the hybrid BCLA-RCA. The four settings
// (REDUNDANT, RCA_BITS) = (0,0), (1,0), (0,4), (1,4) are the four 32-bit
// architectures of the paper; (1,0) is the one it proposes.
//
// Interface: dual-rail a, b (WIDTH bits), cin; dual-rail sum (WIDTH bits),
// cout (regular carry out of the top section) and red_cout (redundant
// carry out of the top BCLG, which the architecture also brings out).
// Timing: no clock; valid data propagates through gates and C-elements,
// the spacer follows it with the same 4-phase discipline.
module eo_bcla
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH     = 32,
  parameter int unsigned RCA_BITS  = 0,
  parameter bit          REDUNDANT = 1'b1
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout,
  output dr_t             red_cout
);

  localparam int unsigned NSEC = (WIDTH - RCA_BITS) / 4;

  if ((WIDTH - RCA_BITS) % 4 != 0 || NSEC == 0) begin : g_bad_width
    $error("eo_bcla: WIDTH - RCA_BITS must be a positive multiple of 4");
  end

  dr_t [NSEC:0] creg;  // regular carries into / out of each section
  dr_t [NSEC-1:0] cla; // carries passed between BCLGs
  dr_t [NSEC:1] cred;  // redundant carries of each BCLG

  if (RCA_BITS > 0) begin : g_rca
    eo_rca #(.WIDTH(RCA_BITS)) u_rca (
      .a    (a[RCA_BITS-1:0]),
      .b    (b[RCA_BITS-1:0]),
      .cin  (cin),
      .sum  (sum[RCA_BITS-1:0]),
      .cout (creg[0])
    );
  end else begin : g_no_rca
    assign creg[0] = cin;
  end
  assign cla[0] = creg[0];

  for (genvar s = 0; s < NSEC; s++) begin : g_sec
    localparam int unsigned LSB = RCA_BITS + 4*s;
    sub_bcla4 u_sec (
      .a        (a[LSB+3:LSB]),
      .b        (b[LSB+3:LSB]),
      .cin      (creg[s]),
      .cin_la   (cla[s]),
      .sum      (sum[LSB+3:LSB]),
      .cout     (creg[s+1]),
      .red_cout (cred[s+1])
    );
    if (s + 1 < NSEC) begin : g_la
      assign cla[s+1] = REDUNDANT ? cred[s+1] : creg[s+1];
    end
  end

  assign cout     = creg[NSEC];
  assign red_cout = cred[NSEC];

endmodule
