// pc2im_top: the point-cloud accelerator. It structures a tile of a point cloud into
// point sets and computes their features, the two stages of a point set abstraction
// (PSA) or point feature propagation (PFP) layer.
//
// Data preprocessing module:
//   apd_cim            holds the tile (2048 points) and yields 16 L1 distances a cycle;
//   ping_pong_max_cam  keeps each point's minimal distance to the centroids and finds
//                      the farthest point (farthest point sampling, FPS);
//   sorter_merger      builds each centroid's neighbour list (lattice query or kNN);
//   CIB / NIB          centroid and neighbour index buffers (sram_1r1w);
//   feature buffer     per-point MLP features (sram_1r1w);
//   aggregation_unit   max-pools neighbour features relative to the centroid;
//   pre_ctrl           sequences FPS and the queries.
// Feature computing module:
//   input buffer       MLP input vectors (sram_1r1w);
//   sc_cim             split-concatenate CIM, 16 x 16 MAC of 16-bit data in 4 cycles;
//   relu_bn            folded batch normalisation and ReLU.
// The bus and control part is given here as plain host ports plus a small MLP
// sequencer; the description names a bus and control block but not its protocol, so
// the ports, the buffer sizes and the sequencing are this design's choices.
//
// Host ports (all synchronous to clk, single-cycle strobes):
//   pt_we/pt_widx/pt_wdata        load a point of the tile (from off-chip DRAM).
//   pt_re/pt_ridx -> pt_rdata     read a point back (1 cycle; only while not busy).
//   pre_start + n_points, n_samples, qmode, range_l -> pre_busy, pre_done:
//                                 FPS of n_samples centroids, then a query per centroid.
//   cib_re/cib_raddr, nib_re/nib_raddr -> 1-cycle read of the index buffers (when
//                                 preprocessing and aggregation are idle).
//   w_we..w_data                  write one MLP weight; bn_we..bn_shift the ReLU/BN setup.
//   fcb_we/fcb_waddr/fcb_wdata    write an MLP input vector to the input buffer.
//   mlp_start + mlp_n, mlp_row, mlp_src, mlp_dst, mlp_to_fb -> mlp_busy, mlp_done:
//                                 run mlp_n vectors from input buffer entry mlp_src+i
//                                 through sc_cim (weight row mlp_row) and relu_bn, to
//                                 feature buffer entry mlp_dst+i (mlp_to_fb = 1) or back
//                                 to input buffer entry mlp_dst+i (next MLP layer).
//   fb_re/fb_raddr -> fb_rdata    read a feature vector (when aggregation is idle).
//   agg_start + agg_n_cent -> agg_out_valid/agg_out_cent/agg_out_feat, agg_done.
// Some sub-block outputs are left unread here on purpose (the reference point, the
// CIM read-valid, the CAM busy and maximum value, the sorter's busy and count):
// the sequencer works from its own fixed schedule and needs only the results.
// Reset is asynchronous and active low; the assertions in the sub-blocks are
// disabled while it is asserted.
module pc2im_top
  import pc2im_pkg::*;
#(
  parameter int K          = 32,    // neighbours per centroid
  parameter int CENT_DEPTH = 512,   // centroids per tile
  parameter int C          = 16,    // feature channels per vector
  parameter int FW         = 16,    // feature width
  parameter int ACC_W      = 40,    // MLP accumulator width
  parameter int FCB_DEPTH  = 2048   // MLP input buffer entries
) (
  input  logic clk,
  input  logic rst_n,
  // point memory
  input  logic                              pt_we,
  input  logic [IDX_W-1:0]                  pt_widx,
  input  point_t                            pt_wdata,
  input  logic                              pt_re,
  input  logic [IDX_W-1:0]                  pt_ridx,
  output point_t                            pt_rdata,
  // preprocessing
  input  logic                              pre_start,
  input  logic [IDX_W:0]                    n_points,
  input  logic [$clog2(CENT_DEPTH+1)-1:0]   n_samples,
  input  query_mode_e                       qmode,
  input  logic [DIST_W-1:0]                 range_l,
  output logic                              pre_busy,
  output logic                              pre_done,
  input  logic                              cib_re,
  input  logic [$clog2(CENT_DEPTH)-1:0]     cib_raddr,
  output logic [IDX_W-1:0]                  cib_rdata,
  input  logic                              nib_re,
  input  logic [$clog2(CENT_DEPTH)-1:0]     nib_raddr,
  output nb_entry_t [K-1:0]                 nib_rdata,
  // MLP weights and post-processing
  input  logic                              w_we,
  input  logic [3:0]                        w_row,
  input  logic [3:0]                        w_out,
  input  logic [3:0]                        w_in,
  input  logic [15:0]                       w_data,
  input  logic                              bn_we,
  input  logic [$clog2(C)-1:0]              bn_ch,
  input  logic signed [15:0]                bn_scale,
  input  logic signed [ACC_W-1:0]           bn_bias,
  input  logic [5:0]                        bn_shift,
  // MLP input buffer and sequencing
  input  logic                              fcb_we,
  input  logic [$clog2(FCB_DEPTH)-1:0]      fcb_waddr,
  input  logic [C-1:0][15:0]                fcb_wdata,
  input  logic                              mlp_start,
  input  logic [$clog2(FCB_DEPTH+1)-1:0]    mlp_n,
  input  logic [3:0]                        mlp_row,
  input  logic [$clog2(FCB_DEPTH)-1:0]      mlp_src,
  input  logic [$clog2(FCB_DEPTH)-1:0]      mlp_dst,
  input  logic                              mlp_to_fb,
  output logic                              mlp_busy,
  output logic                              mlp_done,
  // feature buffer and aggregation
  input  logic                              fb_re,
  input  logic [IDX_W-1:0]                  fb_raddr,
  output logic [C-1:0][FW-1:0]              fb_rdata,
  input  logic                              agg_start,
  input  logic [$clog2(CENT_DEPTH+1)-1:0]   agg_n_cent,
  output logic                              agg_busy,
  output logic                              agg_done,
  output logic                              agg_out_valid,
  output logic [$clog2(CENT_DEPTH)-1:0]     agg_out_cent,
  output logic [C-1:0][FW:0]                agg_out_feat,
  // event counters
  output logic [31:0]                       cnt_fps_iter,
  output logic [31:0]                       cnt_query,
  output logic [31:0]                       cnt_masked_rows,
  output logic [31:0]                       cnt_mlp_vec
);
  localparam int JW = $clog2(CENT_DEPTH);
  localparam int BW = $clog2(FCB_DEPTH);

  // ---------------- data preprocessing ----------------
  logic                         ref_load, cmp_en, dist_valid;
  logic [IDX_W-1:0]             ref_idx;
  logic [ROW_W-1:0]             cmp_row, dist_row;
  logic [N_PTC-1:0][DIST_W-1:0] dist_w;
  point_t                       ref_pt;
  logic                         apd_rd_valid;

  apd_cim u_apd (
    .clk, .rst_n,
    .wr_en    (pt_we),
    .wr_idx   (pt_widx),
    .wr_pt    (pt_wdata),
    .rd_en    (pt_re && !pre_busy),
    .rd_idx   (pt_ridx),
    .rd_valid (apd_rd_valid),
    .rd_pt    (pt_rdata),
    .ref_load,
    .ref_idx,
    .ref_pt,
    .cmp_en,
    .cmp_row,
    .dist_valid,
    .dist_row,
    .dist_out (dist_w)
  );

  logic                  cam_sel, cam_clr, cam_ld_en, cam_ld_first, cam_srch_start;
  logic                  cam_srch_busy, cam_srch_done;
  logic [DIST_W-1:0]     cam_srch_max;
  logic [IDX_W-1:0]      cam_srch_idx;
  logic [N_PTC-1:0]      lane_mask;

  ping_pong_max_cam #(.N_TDG(N_PTC), .N_TDP(N_ROWS), .DW(DIST_W)) u_cam (
    .clk, .rst_n,
    .sel       (cam_sel),
    .ld_clr    (cam_clr),
    .ld_en     (cam_ld_en),
    .ld_first  (cam_ld_first),
    .ld_row    (dist_row),
    .ld_lane   (lane_mask),
    .ld_dist   (dist_w),
    .srch_start(cam_srch_start),
    .srch_busy (cam_srch_busy),
    .srch_done (cam_srch_done),
    .srch_max  (cam_srch_max),
    .srch_idx  (cam_srch_idx)
  );

  logic                     sm_clear, sm_in_valid, sm_busy;
  query_mode_e              sm_mode;
  logic [DIST_W-1:0]        sm_range;
  logic [K-1:0]             sm_lv;
  logic [K-1:0][DIST_W-1:0] sm_ld;
  logic [K-1:0][IDX_W-1:0]  sm_li;
  logic [$clog2(K+1)-1:0]   sm_cnt;
  nb_entry_t [K-1:0]        sm_list;

  sorter_merger #(.N_IN(N_PTC), .K(K), .DW(DIST_W), .IW(IDX_W)) u_sm (
    .clk, .rst_n,
    .clear     (sm_clear),
    .mode      (sm_mode),
    .range_l   (sm_range),
    .in_valid  (sm_in_valid),
    .in_lane   (lane_mask),
    .in_row    (dist_row),
    .in_dist   (dist_w),
    .list_valid(sm_lv),
    .list_dist (sm_ld),
    .list_idx  (sm_li),
    .list_cnt  (sm_cnt),
    .busy      (sm_busy)
  );
  always_comb
    for (int i = 0; i < K; i++) sm_list[i] = '{valid: sm_lv[i], idx: sm_li[i]};

  logic             pc_cib_we, pc_cib_re, pc_nib_we;
  logic [JW-1:0]    pc_cib_waddr, pc_cib_raddr, pc_nib_waddr;
  logic [IDX_W-1:0] pc_cib_wdata;
  nb_entry_t [K-1:0] pc_nib_wdata;

  pre_ctrl #(.N_LANE(N_PTC), .NROWS(N_ROWS), .K(K), .CENT_DEPTH(CENT_DEPTH),
             .DW(DIST_W)) u_ctrl (
    .clk, .rst_n,
    .start          (pre_start),
    .n_points,
    .n_samples,
    .qmode,
    .range_l,
    .busy           (pre_busy),
    .done           (pre_done),
    .ref_load, .ref_idx, .cmp_en, .cmp_row, .dist_valid, .dist_row,
    .cam_sel, .cam_clr, .cam_ld_en, .cam_ld_first, .lane_mask,
    .cam_srch_start, .cam_srch_done, .cam_srch_idx,
    .sm_clear, .sm_mode, .sm_range, .sm_in_valid, .sm_list,
    .cib_we   (pc_cib_we),
    .cib_waddr(pc_cib_waddr),
    .cib_wdata(pc_cib_wdata),
    .cib_re   (pc_cib_re),
    .cib_raddr(pc_cib_raddr),
    .cib_rdata(cib_rdata),
    .nib_we   (pc_nib_we),
    .nib_waddr(pc_nib_waddr),
    .nib_wdata(pc_nib_wdata),
    .cnt_fps_iter, .cnt_query, .cnt_masked_rows
  );

  // Index buffers: one read port each, owned by the controller while it runs, then
  // by the aggregation unit while it runs, else by the host.
  logic          ag_cib_re, ag_nib_re, ag_fb_re;
  logic [JW-1:0] ag_cib_addr, ag_nib_addr;
  logic [IDX_W-1:0] ag_fb_addr;
  logic          cib_re_m, nib_re_m;
  logic [JW-1:0] cib_addr_m, nib_addr_m;

  always_comb begin
    if (pre_busy) begin
      cib_re_m = pc_cib_re;  cib_addr_m = pc_cib_raddr;
    end else if (agg_busy || agg_start) begin
      cib_re_m = ag_cib_re;  cib_addr_m = ag_cib_addr;
    end else begin
      cib_re_m = cib_re;     cib_addr_m = cib_raddr;
    end
    if (agg_busy || agg_start) begin
      nib_re_m = ag_nib_re;  nib_addr_m = ag_nib_addr;
    end else begin
      nib_re_m = nib_re;     nib_addr_m = nib_raddr;
    end
  end

  sram_1r1w #(.DEPTH(CENT_DEPTH), .WIDTH(IDX_W)) u_cib (
    .clk, .we(pc_cib_we), .wr_addr(pc_cib_waddr), .wr_data(pc_cib_wdata),
    .re(cib_re_m), .rd_addr(cib_addr_m), .rd_data(cib_rdata)
  );

  sram_1r1w #(.DEPTH(CENT_DEPTH), .WIDTH(K*(IDX_W+1))) u_nib (
    .clk, .we(pc_nib_we), .wr_addr(pc_nib_waddr), .wr_data(pc_nib_wdata),
    .re(nib_re_m), .rd_addr(nib_addr_m), .rd_data(nib_rdata)
  );

  // ---------------- feature computing ----------------
  typedef enum logic [1:0] {M_IDLE, M_RD, M_ST, M_WAIT} mstate_e;
  mstate_e             mst;
  logic [BW:0]         m_issued, m_done_n;
  logic [$clog2(FCB_DEPTH+1)-1:0] m_n;
  logic [3:0]          m_row;
  logic [BW-1:0]       m_src, m_dst;
  logic                m_to_fb;
  logic [C-1:0][15:0]  fcb_rdata;
  logic                sc_ready, sc_yv, bn_ov;
  logic [C-1:0][ACC_W-1:0] sc_y;
  logic [C-1:0][FW-1:0]    bn_f;
  logic                fcb_re_m, fcb_we_m;
  logic [BW-1:0]       fcb_raddr_m, fcb_waddr_m;
  logic [C-1:0][15:0]  fcb_wdata_m;
  logic                fb_we_m;

  assign fcb_re_m    = (mst == M_RD);
  assign fcb_raddr_m = BW'(m_src + m_issued);

  sram_1r1w #(.DEPTH(FCB_DEPTH), .WIDTH(C*16)) u_fcb (
    .clk, .we(fcb_we_m), .wr_addr(fcb_waddr_m), .wr_data(fcb_wdata_m),
    .re(fcb_re_m), .rd_addr(fcb_raddr_m), .rd_data(fcb_rdata)
  );

  sc_cim #(.N_OUT(C), .N_PAIR(C/2), .ROWS(16), .ACC_W(ACC_W)) u_sc (
    .clk, .rst_n,
    .w_we, .w_row, .w_out, .w_in, .w_data,
    .start  (mst == M_ST && sc_ready),
    .row    (m_row),
    .x      (fcb_rdata),
    .ready  (sc_ready),
    .y_valid(sc_yv),
    .y      (sc_y)
  );

  relu_bn #(.C(C), .ACC_W(ACC_W), .SW(16), .FW(FW)) u_bn (
    .clk, .rst_n,
    .cfg_we   (bn_we),
    .cfg_ch   (bn_ch),
    .cfg_scale(bn_scale),
    .cfg_bias (bn_bias),
    .shift    (bn_shift),
    .in_valid (sc_yv),
    .in_acc   (sc_y),
    .out_valid(bn_ov),
    .out_feat (bn_f)
  );

  always_comb begin
    fcb_we_m    = fcb_we && (mst == M_IDLE);
    fcb_waddr_m = fcb_waddr;
    fcb_wdata_m = fcb_wdata;
    fb_we_m     = bn_ov && m_to_fb;
    if (bn_ov && !m_to_fb) begin
      fcb_we_m    = 1'b1;
      fcb_waddr_m = BW'(m_dst + m_done_n);
      fcb_wdata_m = bn_f;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mst      <= M_IDLE;
      m_issued <= '0;
      m_done_n <= '0;
      m_n      <= '0;
      m_row    <= '0;
      m_src    <= '0;
      m_dst    <= '0;
      m_to_fb  <= 1'b0;
      mlp_done <= 1'b0;
      cnt_mlp_vec <= '0;
    end else begin
      mlp_done <= 1'b0;
      if (bn_ov) begin
        m_done_n    <= m_done_n + 1'b1;
        cnt_mlp_vec <= cnt_mlp_vec + 1;
      end
      unique case (mst)
        M_IDLE: if (mlp_start && mlp_n != 0) begin
          m_n      <= mlp_n;
          m_row    <= mlp_row;
          m_src    <= mlp_src;
          m_dst    <= mlp_dst;
          m_to_fb  <= mlp_to_fb;
          m_issued <= '0;
          m_done_n <= '0;
          mst      <= M_RD;
        end
        M_RD: mst <= M_ST;
        M_ST: if (sc_ready) begin
          m_issued <= m_issued + 1'b1;
          mst      <= ((m_issued + 1'b1) == (BW+1)'(m_n)) ? M_WAIT : M_RD;
        end
        M_WAIT: if (m_done_n == (BW+1)'(m_n) ) begin
          mlp_done <= 1'b1;
          mst      <= M_IDLE;
        end
        default: mst <= M_IDLE;
      endcase
    end
  end
  assign mlp_busy = (mst != M_IDLE);

  // Feature buffer: written by the MLP, read by the aggregation unit or the host.
  logic             fb_re_m;
  logic [IDX_W-1:0] fb_addr_m;
  assign fb_re_m   = (agg_busy || agg_start) ? ag_fb_re   : fb_re;
  assign fb_addr_m = (agg_busy || agg_start) ? ag_fb_addr : fb_raddr;

  sram_1r1w #(.DEPTH(N_POINTS), .WIDTH(C*FW)) u_fb (
    .clk, .we(fb_we_m), .wr_addr(IDX_W'(m_dst + m_done_n)), .wr_data(bn_f),
    .re(fb_re_m), .rd_addr(fb_addr_m), .rd_data(fb_rdata)
  );

  aggregation_unit #(.C(C), .FW(FW), .K(K), .IW(IDX_W), .CENT_DEPTH(CENT_DEPTH)) u_agg (
    .clk, .rst_n,
    .start    (agg_start && !pre_busy),
    .n_cent   (agg_n_cent),
    .busy     (agg_busy),
    .done     (agg_done),
    .cib_re   (ag_cib_re),
    .cib_addr (ag_cib_addr),
    .cib_data (cib_rdata),
    .nib_re   (ag_nib_re),
    .nib_addr (ag_nib_addr),
    .nib_data (nib_rdata),
    .fb_re    (ag_fb_re),
    .fb_addr  (ag_fb_addr),
    .fb_data  (fb_rdata),
    .out_valid(agg_out_valid),
    .out_cent (agg_out_cent),
    .out_feat (agg_out_feat)
  );
endmodule
