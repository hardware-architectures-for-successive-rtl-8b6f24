// sc_line_array -- datapath of the line SC decoder: a line of n/2 processing
// elements (PEs), the tree of n-1 LLR registers R_{l,j} with their partial-sum
// blocks, and the multiplexers that let the PE line emulate the tree.
//
// Only one stage is active per cycle, and stage l updates 2^l nodes, so n/2
// PEs are enough. When stage m-1 is active (`chan_sel`), PE q computes node
// N_{m-1,q} from channel LLRs lambda_{2q}, lambda_{2q+1} and writes R_{m-1,q}.
// Every node N_{l,j} of a lower stage (l <= m-2) is permanently assigned to
// one PE, pe_of(l,j) in sc_pkg; that PE then reads R_{l+1,2j} and
// R_{l+1,2j+1} and writes R_{l,j}. So each assigned PE has a 2-input
// multiplexer on each input (channel or tree registers) and its result goes to
// one of two registers; one PE is never assigned and needs no multiplexer,
// giving 3(n/2-1) two-input multiplexers in all. The PE takes its u_s from the
// partial-sum block of the node it is computing.
//
// Timing: in a cycle with `en` high, the PEs serving the active `stage`
// compute combinationally and the registers of that stage are written on the
// rising edge. `stage0_llr` is the PE result while stage 0 is active (the LLR
// of the bit being decided, for the decision unit); `r00` is register R_{0,0}.
// The decided bit `u_hat` enters the partial sums on the same edge.
// The structure follows the published line architecture; the PE assignment
// rule and the reset of the registers to 0 are this design's own.
module sc_line_array #(
  parameter int N  = 8,
  parameter int W  = 8,
  parameter int M  = $clog2(N),
  parameter int SW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,          // an operation is executed
  input  logic [SW-1:0]       stage,       // active stage
  input  sc_pkg::sc_op_e      op,          // b_l
  input  logic                chan_sel,    // stage m-1 active
  input  logic signed [W-1:0] lambda   [N],
  input  logic [M-1:0]        psum_upd,
  input  logic [M-1:0]        psum_clr,
  input  logic [N-2:0]        psum_sel,
  input  logic                u_hat,
  output logic signed [W-1:0] stage0_llr,
  output logic signed [W-1:0] r00
);
  import sc_pkg::*;

  localparam int NP = N / 2;   // number of PEs
  localparam int NR = N - 1;   // number of tree registers

  if (N < 4 || (1 << M) != N) begin : g_bad_n
    $error("sc_line_array: N must be a power of two, at least 4");
  end

  logic signed [W-1:0] r     [NR];  // R_{l,j} at node_idx(l,j)
  logic                us_v  [NR];  // u_s of node (l,j)
  logic signed [W-1:0] pe_a  [NP];
  logic signed [W-1:0] pe_b  [NP];
  logic                pe_us [NP];
  logic signed [W-1:0] pe_y  [NP];

  // ---- PE line with its input multiplexers ----
  for (genvar q = 0; q < NP; q++) begin : g_pe
    localparam int IL = pe_int_stage(M, q);
    localparam int IJ = pe_int_node(q);
    localparam int LEAF = node_idx(M - 1, q);
    if (IL >= 0) begin : g_shared
      localparam int SELF = node_idx(IL, IJ);
      localparam int SRC0 = node_idx(IL + 1, 2 * IJ);
      localparam int SRC1 = node_idx(IL + 1, 2 * IJ + 1);
      assign pe_a[q]  = chan_sel ? lambda[2*q]   : r[SRC0];
      assign pe_b[q]  = chan_sel ? lambda[2*q+1] : r[SRC1];
      assign pe_us[q] = chan_sel ? us_v[LEAF]    : us_v[SELF];
    end else begin : g_leaf_only
      assign pe_a[q]  = lambda[2*q];
      assign pe_b[q]  = lambda[2*q+1];
      assign pe_us[q] = us_v[LEAF];
    end
    sc_pe #(.W(W)) u_pe (
      .op(op), .us(pe_us[q]), .a(pe_a[q]), .b(pe_b[q]), .y(pe_y[q])
    );
  end

  // ---- register tree with output multiplexing and partial-sum blocks ----
  for (genvar l = 0; l < M; l++) begin : g_lvl
    for (genvar j = 0; j < (1 << l); j++) begin : g_node
      localparam int IDX = node_idx(l, j);
      localparam int PE  = (l == M - 1) ? j : pe_of(M, l, j);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                          r[IDX] <= '0;
        else if (en && stage == SW'(l))      r[IDX] <= pe_y[PE];
      end
      sc_psum u_psum (
        .clk(clk), .rst_n(rst_n), .upd(psum_upd[l]), .clr(psum_clr[l]),
        .sel(psum_sel[IDX]), .u_hat(u_hat), .us(us_v[IDX])
      );
    end
  end

  assign stage0_llr = pe_y[pe_of(M, 0, 0)];
  assign r00        = r[0];

endmodule
