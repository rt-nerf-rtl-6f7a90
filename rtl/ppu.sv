// ppu: parallel processing unit of the RT-NeRF accelerator, with its local controller.
//
// A PPU computes the features of pre-existing points (the vector-matrix decomposition of
// the embedding grid, then the colour MLP) and integrates them into the pixels of its
// tile. It holds (paper Fig. 9(b)) a multiplier pool, a sparse MLP unit, an integration &
// mask unit, the dual-purpose bi-direction adder & search tree, the high-density sparse
// search unit with its bitmap / row-pointer / non-zero SRAMs, a global buffer and the
// local controller, which is the state machine in this file.
//
// Commands (cmd_t, valid/ready, taken only between points):
//   OP_LOAD       DMA: read `count` words from DRAM at dram_addr through the memory
//                 controller and write them to local memory `tgt` from local_addr on.
//   OP_TREE_LOAD  empty the leaf crossbar registers, then copy `count` spm_entry_t words
//                 of the sparse matrix buffer (from local_addr) into the search sub-tree.
//   OP_FRAME      reset all pixels of the tile (T = 1, C = 0).
//   OP_READ       stream `count` pixels from local_addr on, one per cycle, on px_*.
// Points (point_t) enter the data buffer FIFO through pt_valid/pt_ready. Per point:
//   MASK   the point selection unit is asked whether the pixel is still visible; if its
//          transmittance is below threshold the point is dropped (early ray termination).
//   LOOK   one term per cycle: the vector element goes to bitmap search port 0; the matrix
//          element goes to bitmap search port 1 (bitmap-encoded matrix) or to the search
//          sub-tree (COO-encoded matrix; the tree is in mixed mode). Both answer after 3
//          cycles.
//   MUL    the multiplier pool forms the LANES products of a batch per cycle.
//   ADD    the tree, switched to adder mode, sums the density products LANES at a time.
//   MLP    the appearance products and the direction feed the sparse MLP -> RGB.
//   INT    sigma, delta and RGB go to the integration & mask unit.
// Terms 0 .. NT_SIG-1 are density terms, NT_SIG .. NT_SIG+NT_APP-1 appearance terms.
// The paper describes the units and the split of work; the command set, the sequencing,
// the term table and all sizes are this design's choices.
module ppu
  import rtnerf_pkg::*;
#(
  parameter int NT_SIG    = 12,       // density terms (3 axes x 4 components)
  parameter int NT_APP    = 12,       // appearance terms (3 axes x 4 components)
  parameter int LANES     = 8,        // multipliers = adder-tree leaves
  parameter int HD_ROWS   = 8192,
  parameter int HD_NZ     = 262144,
  parameter int MLP_HID   = 16,
  parameter int SPM_DEPTH = 256,
  parameter int PT_DEPTH  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control bus
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  output logic                 cmd_ready,
  // points from the serial processing units
  input  logic                 pt_valid,
  input  point_t               pt,
  output logic                 pt_ready,
  // memory controller / data bus
  output logic                 req_valid,
  output logic [ADDR_W-1:0]    req_addr,
  input  logic                 req_ready,
  input  logic                 rsp_valid,
  input  logic [DRAM_W-1:0]    rsp_data,
  // rendered pixels
  output logic                 px_valid,
  output logic [PIX_W-1:0]     px_pix,
  output data_t [2:0]          px_rgb,
  output trans_t               px_t,
  // status
  output logic                 idle,
  output ppu_perf_t            perf
);
  localparam int NT   = NT_SIG + NT_APP;
  localparam int NB   = (NT + LANES - 1) / LANES;       // multiply batches
  localparam int NS   = (NT_SIG + LANES - 1) / LANES;   // adder chunks
  localparam int NIN  = NT_APP + 3;
  localparam int RW   = $clog2(HD_ROWS);
  localparam int LAT  = 3;                              // lookup latency, both decoders

  // ------------------------------------------------------------------ controller state
  typedef enum logic [3:0] {
    S_IDLE, S_DMA, S_TREE, S_READ,
    S_MASK, S_LOOK, S_LWAIT, S_MUL, S_ADD, S_MLP, S_INT
  } state_e;

  state_e      state;
  cmd_t        c;
  point_t      cur;
  term_t       terms [NT];
  logic [15:0] iss, rcv;
  data_t       vreg [NT];
  data_t       mreg [NT];
  data_t       prod [NT];
  logic signed [31:0] sigma_acc;
  data_t       sigma_q;
  data_t [2:0] rgb_q;

  // ------------------------------------------------------------------ sub-units
  // global buffer
  logic   gb_pop, gb_empty, gb_full;
  point_t gb_head;
  logic   spm_we, spm_re;
  logic [$clog2(SPM_DEPTH)-1:0] spm_waddr, spm_raddr;
  logic [63:0] spm_rdata;

  global_buffer #(.PT_DEPTH(PT_DEPTH), .SPM_DEPTH(SPM_DEPTH)) u_gbuf (
    .clk, .rst_n,
    .pt_push (pt_valid), .pt_in (pt), .pt_full (gb_full),
    .pt_pop (gb_pop), .pt_out (gb_head), .pt_empty (gb_empty),
    .spm_we, .spm_waddr, .spm_wdata (rsp_data),
    .spm_re, .spm_raddr, .spm_rdata
  );
  assign pt_ready = !gb_full;

  // high-density sparse search unit
  logic             hd_we;
  tgt_e             hd_tgt;
  logic [31:0]      hd_waddr;
  logic [1:0]       hd_qv;
  logic [1:0][RW-1:0] hd_qrow;
  logic [1:0][7:0]  hd_qcol;
  logic [1:0]       hd_rv, hd_rnz;
  data_t [1:0]      hd_rdata;

  hdssu #(.ROWS(HD_ROWS), .COLS(256), .NZ_DEPTH(HD_NZ), .PORTS(2)) u_hdssu (
    .clk, .rst_n,
    .wr_en (hd_we), .wr_tgt (hd_tgt), .wr_addr (hd_waddr), .wr_data (rsp_data),
    .q_valid (hd_qv), .q_row (hd_qrow), .q_col (hd_qcol),
    .r_valid (hd_rv), .r_nonzero (hd_rnz), .r_data (hd_rdata)
  );

  // dual-purpose adder & search tree
  tree_mode_e          tmode;
  logic                t_add_v, t_sum_v, t_s_v, t_r_v, t_r_hit;
  data_t [LANES-1:0]   t_add_in;
  logic signed [DATA_W+$clog2(LANES)-1:0] t_sum_all, t_sum_a;
  coord_t              t_sx, t_sy;
  data_t               t_r_data;
  logic                t_cfg_clr, t_cfg_we;
  spm_entry_t          t_cfg;

  dbast #(.LEAVES(LANES), .LEAF_ENTRIES(3)) u_tree (
    .clk, .rst_n, .mode (tmode),
    .add_valid (t_add_v), .add_in (t_add_in),
    .sum_valid (t_sum_v), .sum_all (t_sum_all), .sum_a (t_sum_a),
    .s_valid (t_s_v), .s_x (t_sx), .s_y (t_sy),
    .r_valid (t_r_v), .r_hit (t_r_hit), .r_data (t_r_data),
    .cfg_clr (t_cfg_clr), .cfg_we (t_cfg_we), .cfg_leaf (t_cfg.is_leaf),
    .cfg_idx (t_cfg.idx), .cfg_slot (t_cfg.slot), .cfg_dim (t_cfg.dim),
    .cfg_thr (t_cfg.thr), .cfg_x (t_cfg.cx), .cfg_y (t_cfg.cy), .cfg_value (t_cfg.value)
  );

  // multiplier pool
  logic               mp_v, mp_ov;
  logic [LANES-1:0]   mp_en, mp_oen;
  data_t [LANES-1:0]  mp_a, mp_b, mp_p;
  mult_pool #(.LANES(LANES)) u_mult (
    .clk, .rst_n, .in_valid (mp_v), .in_en (mp_en), .a (mp_a), .b (mp_b),
    .out_valid (mp_ov), .out_en (mp_oen), .p (mp_p)
  );

  // sparse MLP unit
  logic             mlp_we, mlp_start, mlp_busy, mlp_done;
  data_t [NIN-1:0]  mlp_x;
  data_t [2:0]      mlp_y;
  sparse_mlp_unit #(.N_IN(NIN), .N_HID(MLP_HID), .N_OUT(3)) u_mlp (
    .clk, .rst_n, .w_we (mlp_we), .w_addr (hd_waddr[15:0]), .w_data (rsp_data),
    .start (mlp_start), .x_in (mlp_x), .busy (mlp_busy), .done (mlp_done), .y (mlp_y)
  );

  // integration & mask unit
  logic          im_clr, im_v, im_upd, im_masked, im_visible;
  logic [PIX_W-1:0] im_rd_pix;
  integration_mask_unit u_imu (
    .clk, .rst_n, .frame_clr (im_clr),
    .mq_pix (cur.pix), .mq_visible (im_visible),
    .in_valid (im_v), .in_pix (cur.pix), .in_sigma (sigma_q), .in_delta (cur.delta),
    .in_rgb (rgb_q), .upd_valid (im_upd), .upd_masked (im_masked),
    .rd_pix (im_rd_pix), .rd_rgb (px_rgb), .rd_t (px_t)
  );

  // ------------------------------------------------------------------ local controller
  // lookup return tags
  logic [LAT-1:0]  tag_v;
  logic [LAT-1:0]  tag_coo;
  logic [7:0]      tag_j [LAT];
  logic [7:0]      mb_tag;     // batch index in the multiplier

  // term j decoding
  term_t  tj;
  coord_t ta, tb, tc;
  always_comb begin
    tj = terms[iss[$clog2(NT)-1:0]];
    unique case (tj.axis)
      AX_X:    begin tc = cur.x; ta = cur.y; tb = cur.z; end
      AX_Y:    begin tc = cur.y; ta = cur.x; tb = cur.z; end
      default: begin tc = cur.z; ta = cur.x; tb = cur.y; end
    endcase
  end

  // ---- combinational strobes
  always_comb begin
    cmd_ready = (state == S_IDLE);
    gb_pop    = (state == S_IDLE) && !cmd_valid && !gb_empty;
    req_valid = (state == S_DMA) && (iss < c.count);
    req_addr  = c.dram_addr + ADDR_W'(iss);

    hd_we     = (state == S_DMA) && rsp_valid && (c.tgt inside {TGT_BITMAP, TGT_ROWPTR, TGT_NZ});
    hd_tgt    = c.tgt;
    hd_waddr  = c.local_addr + 32'(rcv);
    mlp_we    = (state == S_DMA) && rsp_valid && (c.tgt == TGT_WEIGHT);
    spm_we    = (state == S_DMA) && rsp_valid && (c.tgt == TGT_SPM);
    spm_waddr = hd_waddr[$clog2(SPM_DEPTH)-1:0];

    spm_re    = (state == S_TREE) && (iss < c.count);
    spm_raddr = $clog2(SPM_DEPTH)'(c.local_addr + 32'(iss));

    im_clr    = (state == S_IDLE) && cmd_valid && (cmd.op == OP_FRAME);
    im_rd_pix = PIX_W'(c.local_addr + 32'(iss));
    px_valid  = (state == S_READ) && (iss < c.count);
    px_pix    = im_rd_pix;

    // lookups
    hd_qv      = '0;
    hd_qrow[0] = tj.vec_row[RW-1:0];
    hd_qcol[0] = tc;
    hd_qrow[1] = RW'(tj.mat_base) + RW'(ta);
    hd_qcol[1] = tb;
    t_s_v      = 1'b0;
    t_sx       = ta;
    t_sy       = tb;
    if (state == S_LOOK) begin
      hd_qv[0] = 1'b1;
      if (tj.enc == ENC_BITMAP) hd_qv[1] = 1'b1;
      else                      t_s_v    = 1'b1;
    end

    // multiplier batches
    mp_v = (state == S_MUL) && (iss < 16'(NB));
    for (int l = 0; l < LANES; l++) begin
      int j;
      j = int'(iss) * LANES + l;
      mp_en[l] = (j < NT);
      mp_a[l]  = (j < NT) ? vreg[j] : data_t'(0);
      mp_b[l]  = (j < NT) ? mreg[j] : data_t'(0);
    end

    // adder chunks (density terms only)
    t_add_v = (state == S_ADD) && (iss < 16'(NS));
    for (int l = 0; l < LANES; l++) begin
      int j;
      j = int'(iss) * LANES + l;
      t_add_in[l] = (j < NT_SIG) ? prod[j] : data_t'(0);
    end

    for (int i = 0; i < NT_APP; i++) mlp_x[i] = prod[NT_SIG + i];
    mlp_x[NT_APP]     = cur.dx;
    mlp_x[NT_APP + 1] = cur.dy;
    mlp_x[NT_APP + 2] = cur.dz;
    mlp_start = (state == S_MLP) && !mlp_busy && (iss == 0);

    im_v = (state == S_INT);
  end

  // ---- tree configuration from the sparse matrix buffer (1-cycle read)
  logic spm_rv;
  assign t_cfg     = spm_entry_t'(spm_rdata);
  assign t_cfg_we  = spm_rv;
  assign t_cfg_clr = (state == S_IDLE) && cmd_valid && (cmd.op == OP_TREE_LOAD);

  // ---- sequential part
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      iss     <= '0;
      rcv     <= '0;
      tmode   <= TREE_ADD;
      tag_v   <= '0;
      spm_rv  <= 1'b0;
      perf    <= '0;
      c       <= '0;
      cur     <= '0;
      sigma_acc <= '0;
      rgb_q   <= '0;
      for (int j = 0; j < NT; j++) terms[j] <= '0;
    end else begin
      spm_rv <= spm_re;
      tag_v  <= {tag_v[LAT-2:0], (state == S_LOOK)};
      if (req_valid && !req_ready) perf.mem_stalls <= perf.mem_stalls + 1;
      if (im_masked)               perf.points_masked <= perf.points_masked + 1;
      if (im_upd && !im_masked)    perf.points_done <= perf.points_done + 1;

      unique case (state)
        S_IDLE: begin
          iss <= '0;
          rcv <= '0;
          if (cmd_valid) begin
            c <= cmd;
            unique case (cmd.op)
              OP_LOAD:      state <= (cmd.count == 0) ? S_IDLE : S_DMA;
              OP_TREE_LOAD: state <= (cmd.count == 0) ? S_IDLE : S_TREE;
              OP_READ:      state <= (cmd.count == 0) ? S_IDLE : S_READ;
              default:      state <= S_IDLE;      // OP_FRAME acts at once
            endcase
          end else if (!gb_empty) begin
            cur   <= gb_head;
            state <= S_MASK;
          end
        end

        S_DMA: begin
          if (req_valid && req_ready) iss <= iss + 1;
          if (rsp_valid) begin
            if (c.tgt == TGT_TERM) terms[hd_waddr[$clog2(NT)-1:0]] <= term_t'(rsp_data[$bits(term_t)-1:0]);
            rcv <= rcv + 1;
            if (rcv + 1 == c.count) state <= S_IDLE;
          end
        end

        S_TREE: begin
          if (iss < c.count) iss <= iss + 1;
          if (spm_rv) begin
            rcv <= rcv + 1;
            if (rcv + 1 == c.count) state <= S_IDLE;
          end
        end

        S_READ: begin
          iss <= iss + 1;
          if (iss + 1 == c.count) state <= S_IDLE;
        end

        S_MASK: begin
          if (!im_visible) begin
            perf.points_skipped <= perf.points_skipped + 1;
            state <= S_IDLE;
          end else begin
            if (tmode != TREE_MIXED) perf.mode_switches <= perf.mode_switches + 1;
            tmode <= TREE_MIXED;
            iss   <= '0;
            rcv   <= '0;
            state <= S_LOOK;
          end
        end

        S_LOOK: begin
          if (tj.enc == ENC_BITMAP) perf.bitmap_lookups <= perf.bitmap_lookups + 1;
          else                      perf.coo_lookups    <= perf.coo_lookups + 1;
          iss <= iss + 1;
          if (iss + 1 == 16'(NT)) state <= S_LWAIT;
        end

        S_LWAIT: if (rcv == 16'(NT)) begin
          iss   <= '0;
          rcv   <= '0;
          state <= S_MUL;
        end

        S_MUL: begin
          if (iss < 16'(NB)) iss <= iss + 1;
          if (mp_ov) begin
            rcv <= rcv + 1;
            if (rcv + 1 == 16'(NB)) begin
              iss   <= '0;
              rcv   <= '0;
              sigma_acc <= '0;
              if (tmode != TREE_ADD) perf.mode_switches <= perf.mode_switches + 1;
              tmode <= TREE_ADD;
              state <= S_ADD;
            end
          end
        end

        S_ADD: begin
          if (iss < 16'(NS)) iss <= iss + 1;
          if (t_sum_v) begin
            sigma_acc <= sigma_acc + 32'(t_sum_all);
            rcv <= rcv + 1;
            if (rcv + 1 == 16'(NS)) begin
              iss   <= '0;
              state <= S_MLP;
            end
          end
        end

        S_MLP: begin
          if (mlp_start) iss <= 16'd1;
          if (mlp_done) begin
            rgb_q <= mlp_y;
            state <= S_INT;
          end
        end

        S_INT: state <= S_IDLE;

        default: state <= S_IDLE;
      endcase

      // lookup returns (during S_LOOK / S_LWAIT)
      if (tag_v[LAT-1]) rcv <= rcv + 1;
    end
  end

  // datapath registers without reset
  always_ff @(posedge clk) begin
    tag_j[0]   <= 8'(iss);
    tag_coo[0] <= (tj.enc == ENC_COO);
    for (int k = 1; k < LAT; k++) begin
      tag_j[k]   <= tag_j[k-1];
      tag_coo[k] <= tag_coo[k-1];
    end
    if (tag_v[LAT-1]) begin
      vreg[tag_j[LAT-1]] <= hd_rdata[0];
      mreg[tag_j[LAT-1]] <= tag_coo[LAT-1] ? t_r_data : hd_rdata[1];
    end
    mb_tag <= 8'(iss);
    if (mp_ov)
      for (int l = 0; l < LANES; l++)
        if (int'(mb_tag) * LANES + l < NT) prod[int'(mb_tag) * LANES + l] <= mp_p[l];
    sigma_q <= sat16(40'(sigma_acc));
  end

  assign idle = (state == S_IDLE) && gb_empty;
endmodule
