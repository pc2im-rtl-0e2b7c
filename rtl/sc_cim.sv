// sc_cim: split-concatenate SRAM-CIM, the MLP engine. It computes, for a 16-element
// vector x of 16-bit signed inputs, the 16 dot products y[o] = sum_i x[i] * W[row][o][i]
// with 16-bit signed weights, in four cycles instead of the sixteen of a bit-serial CIM.
//
// Splitting. Each 16-bit weight is cut into four 4-bit blocks (block b = bits
// 4b+3..4b); each block lives in its own weight slice, so the 64 slices hold 16
// outputs x 4 blocks (slice = 4*o + b, this design's mapping). Each 16-bit input is
// cut bit-wise into four interleaved 4-bit clusters: cluster c holds bits c, c+4, c+8
// and c+12, so the bits of a cluster are 2^4 apart. One cluster of every input is
// applied per cycle (c = 0..3).
//
// Slice. A weight slice has 8 pairs of local weight blocks (LWB A and B, one pair per
// two adjacent inputs), each LWB holding ROWS rows of one 4-bit block; the row input
// selects which stored weight set is used. Each pair feeds a fused adder (sc_fua)
// whose dense and sparse outputs go to the dense and the sparse adder trees. The
// slice's local accumulator (LAcc) adds the tree result shifted by c.
//
// Signs (merged in the periphery, as the description says, with this design's own
// arithmetic): all picks are unsigned. In cycle 3 the cluster bit k = 3 is input bit
// 15, which has weight -2^15, so a sign accumulator subtracts twice that position's
// picks. For the top weight block (b = 3) the nibble's bit 3 has weight -8 rather than
// +8; the sign part sum_i w[i][15] * x[i] is accumulated from the same clusters and
// 16 times it is subtracted. The precision merger adds the four block results of an
// output with shifts of 4b.
//
// Timing: start with x and row at cycle t; clusters are applied in cycles t+1..t+4;
// y_valid is high in cycle t+5. A new start is accepted in the last cluster cycle
// (ready high), so vectors stream at one per four cycles.
// Weight write: one 16-bit weight per cycle (w_we, w_row, w_out, w_in, w_data); it must
// not change a row in use by a running computation.
module sc_cim #(
  parameter int N_OUT  = 16,  // outputs per row set
  parameter int N_PAIR = 8,   // LWB pairs per slice
  parameter int ROWS   = 16,  // rows per LWB
  parameter int ACC_W  = 40   // output width
) (
  input  logic clk,
  input  logic rst_n,
  // weight write
  input  logic                        w_we,
  input  logic [$clog2(ROWS)-1:0]     w_row,
  input  logic [$clog2(N_OUT)-1:0]    w_out,
  input  logic [$clog2(2*N_PAIR)-1:0] w_in,
  input  logic [15:0]                 w_data,
  // computation
  input  logic                        start,
  input  logic [$clog2(ROWS)-1:0]     row,
  input  logic [2*N_PAIR-1:0][15:0]   x,
  output logic                        ready,
  output logic                        y_valid,
  output logic [N_OUT-1:0][ACC_W-1:0] y
);
  localparam int N_IN    = 2 * N_PAIR;
  localparam int N_BLK   = 4;
  localparam int N_SLICE = N_OUT * N_BLK;
  localparam int PW      = 32;            // width of a slice's partial result

  // Local weight blocks: lwb[slice][input][row].
  logic [3:0] lwb [N_SLICE][N_IN][ROWS];

  always_ff @(posedge clk) begin
    if (w_we)
      for (int b = 0; b < N_BLK; b++)
        lwb[N_BLK*w_out + b][w_in][w_row] <= w_data[4*b +: 4];
  end

  // Control: latched inputs and the cluster counter.
  logic [N_IN-1:0][15:0]    x_q;
  logic [$clog2(ROWS)-1:0]  row_q;
  logic                     busy;
  logic [1:0]               cyc;
  logic                     last;
  assign last  = busy && (cyc == 2'd3);
  assign ready = !busy || last;

  // Input splitter: cluster of each input for this cycle.
  logic [N_IN-1:0][3:0] clu;
  always_comb
    for (int i = 0; i < N_IN; i++)
      for (int k = 0; k < 4; k++)
        clu[i][k] = x_q[i][4*k + int'(cyc)];

  // Signed value of a cluster (bit k weighs 2^(4k); input bit 15 is negative).
  function automatic logic signed [PW-1:0] clu_val(logic [3:0] cl, logic sgn);
    logic signed [PW-1:0] v;
    v = PW'(cl[0]) + (PW'(cl[1]) << 4) + (PW'(cl[2]) << 8);
    if (sgn) v = v - (PW'(cl[3]) << 12);
    else     v = v + (PW'(cl[3]) << 12);
    return v;
  endfunction

  logic signed [N_SLICE-1:0][PW-1:0] part;   // slice results of this cycle
  for (genvar s = 0; s < N_SLICE; s++) begin : g_slice
    logic [N_PAIR-1:0][15:0] dense;
    logic [N_PAIR-1:0][3:0]  carry;
    logic [N_PAIR-1:0][4:0]  topv;
    for (genvar p = 0; p < N_PAIR; p++) begin : g_fua
      sc_fua u_fua (
        .wa     (lwb[s][2*p][row_q]),
        .wb     (lwb[s][2*p+1][row_q]),
        .ina    (clu[2*p]),
        .inb    (clu[2*p+1]),
        .dense  (dense[p]),
        .carry  (carry[p]),
        .top_val(topv[p])
      );
    end
    // dense adder tree, sparse adder tree, sign accumulator, weight sign part
    logic [PW-1:0]        dsum, ssum, sacc;
    logic signed [PW-1:0] wsgn;
    always_comb begin
      dsum = '0;
      ssum = '0;
      sacc = '0;
      wsgn = '0;
      for (int p = 0; p < N_PAIR; p++) begin
        dsum = dsum + PW'(dense[p]);
        for (int k = 0; k < 4; k++)
          ssum = ssum + (PW'(carry[p][k]) << (4*k + 4));
        sacc = sacc + PW'(topv[p]);
      end
      for (int i = 0; i < N_IN; i++)
        if (lwb[s][i][row_q][3]) wsgn = wsgn + clu_val(clu[i], cyc == 2'd3);
      part[s] = dsum + ssum;
      if (cyc == 2'd3) part[s] = part[s] - (sacc << 13);
      if ((s % N_BLK) == N_BLK - 1) part[s] = part[s] - (wsgn <<< 4);
    end
  end

  // Local accumulators and precision merger.
  logic signed [N_SLICE-1:0][ACC_W-1:0] lacc, lacc_n;
  logic signed [N_OUT-1:0][ACC_W-1:0]   y_n;
  always_comb begin
    for (int s = 0; s < N_SLICE; s++)
      lacc_n[s] = ((cyc == 2'd0) ? ACC_W'(0) : lacc[s])
                + (ACC_W'($signed(part[s])) <<< cyc);
    for (int o = 0; o < N_OUT; o++) begin
      y_n[o] = '0;
      for (int b = 0; b < N_BLK; b++)
        y_n[o] = y_n[o] + ($signed(lacc_n[N_BLK*o + b]) <<< (4*b));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cyc     <= '0;
      x_q     <= '0;
      row_q   <= '0;
      lacc    <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (busy) begin
        lacc <= lacc_n;
        cyc  <= cyc + 2'd1;
        if (last) begin
          y       <= y_n;
          y_valid <= 1'b1;
          busy    <= 1'b0;
        end
      end
      if (start && ready) begin
        x_q   <= x;
        row_q <= row;
        busy  <= 1'b1;
        cyc   <= '0;
      end
    end
  end
endmodule
