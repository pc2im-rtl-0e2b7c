// aggregation_unit: feature aggregation of a point set abstraction layer with delayed
// aggregation. The MLP is applied to every point once (features in the feature
// buffer); aggregation then forms, for each sampled centroid j,
//     out[j][ch] = max over neighbours n of F[n][ch]  -  F[centroid j][ch]
// i.e. the max pooling of the neighbour features relative to the centroid's. The
// description names this unit and the delayed-aggregation flow; the sequencing below
// (read the centroid index, the neighbour list and the features one by one) and the
// output format are this design's own.
//
// The unit reads three buffers through 1-cycle-latency read ports: the centroid index
// buffer (entry j = index of centroid j), the neighbour index buffer (entry j = list
// of K {valid, index} entries) and the feature buffer (entry = C features of FW bits,
// signed). The centroid is included in its own max (it is always its own neighbour).
// Timing: after start, per centroid 2 cycles of set-up, one cycle per list entry
// (feature reads are pipelined, invalid entries are skipped in the same cycle) and 1
// drain cycle; out_valid pulses with out_cent and out_feat; done pulses at the end.
module aggregation_unit
  import pc2im_pkg::*;
#(
  parameter int C  = 16,
  parameter int FW = 16,
  parameter int K  = 32,
  parameter int IW = IDX_W,
  parameter int CENT_DEPTH = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                              start,
  input  logic [$clog2(CENT_DEPTH+1)-1:0]   n_cent,
  output logic                              busy,
  output logic                              done,
  // centroid index buffer
  output logic                              cib_re,
  output logic [$clog2(CENT_DEPTH)-1:0]     cib_addr,
  input  logic [IW-1:0]                     cib_data,
  // neighbour index buffer
  output logic                              nib_re,
  output logic [$clog2(CENT_DEPTH)-1:0]     nib_addr,
  input  nb_entry_t [K-1:0]                 nib_data,
  // feature buffer
  output logic                              fb_re,
  output logic [IW-1:0]                     fb_addr,
  input  logic [C-1:0][FW-1:0]              fb_data,
  // aggregated feature out
  output logic                              out_valid,
  output logic [$clog2(CENT_DEPTH)-1:0]     out_cent,
  output logic [C-1:0][FW:0]                out_feat
);
  localparam int JW = $clog2(CENT_DEPTH);
  localparam int NW = $clog2(K + 1);

  typedef enum logic [2:0] {S_IDLE, S_IDX, S_CEN, S_NB, S_DRAIN} state_e;
  state_e state;

  logic [JW:0]           j;
  logic [NW-1:0]         n;
  nb_entry_t [K-1:0]     nlist;
  logic [C-1:0][FW-1:0]  cen, mx;
  logic                  pend;     // a neighbour feature read is in flight

  always_comb begin
    cib_re   = (state == S_IDLE && start) || (state == S_DRAIN && (j + 1'b1) < n_cent);
    nib_re   = cib_re;
    cib_addr = (state == S_IDLE) ? '0 : JW'(j + 1'b1);
    nib_addr = cib_addr;
    fb_re    = 1'b0;
    fb_addr  = '0;
    if (state == S_IDX) begin
      fb_re   = 1'b1;
      fb_addr = cib_data;
    end else if (state == S_NB && n < NW'(K) && nlist[n[NW-2:0]].valid) begin
      fb_re   = 1'b1;
      fb_addr = nlist[n[NW-2:0]].idx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      j         <= '0;
      n         <= '0;
      nlist     <= '0;
      cen       <= '0;
      mx        <= '0;
      pend      <= 1'b0;
      done      <= 1'b0;
      out_valid <= 1'b0;
      out_cent  <= '0;
      out_feat  <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      if (pend)
        for (int c = 0; c < C; c++)
          if ($signed(fb_data[c]) > $signed(mx[c])) mx[c] <= fb_data[c];
      case (state)
        S_IDLE: if (start) begin
          if (n_cent == 0) done <= 1'b1;
          else begin
            j     <= '0;
            state <= S_IDX;
          end
        end
        S_IDX: begin               // index and neighbour list arrive
          nlist <= nib_data;
          state <= S_CEN;
        end
        S_CEN: begin               // centroid feature arrives
          cen   <= fb_data;
          mx    <= fb_data;
          n     <= '0;
          pend  <= 1'b0;
          state <= S_NB;
        end
        S_NB: begin
          pend <= fb_re;
          if (n == NW'(K)) state <= S_DRAIN;
          else             n <= n + 1'b1;
        end
        S_DRAIN: begin             // last feature folded in this cycle
          pend      <= 1'b0;
          out_valid <= 1'b1;
          out_cent  <= JW'(j);
          for (int c = 0; c < C; c++)
            out_feat[c] <= (FW+1)'($signed(mx_fin(c))) - (FW+1)'($signed(cen[c]));
          if ((j + 1'b1) < n_cent) begin
            j     <= j + 1'b1;
            state <= S_IDX;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Max including a feature that arrives in the drain cycle.
  function automatic logic signed [FW-1:0] mx_fin(int c);
    if (pend && $signed(fb_data[c]) > $signed(mx[c])) return fb_data[c];
    return mx[c];
  endfunction

  assign busy = (state != S_IDLE);
endmodule
