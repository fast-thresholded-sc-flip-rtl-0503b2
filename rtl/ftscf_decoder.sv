// ftscf_decoder: Fast Thresholded SC-Flip (Fast-TSCF) polar decoder, top level.
//
// Decodes one frame of a polar code of length N (default PC(1024,512) with a
// 16-bit CRC).  The first attempt is ordinary fast SC decoding: a depth-first
// walk of the decoding tree that computes f (left child) and g (right child)
// LLRs P lanes per cycle, and decodes every Rate-0, Rate-1, Rep or SPC node of
// at most P leaves in one cycle without walking below it.  While doing so the
// node decoders report bit-flip candidates whose LLR magnitude is at most the
// threshold Omega* = 2(Eb/N0 + 3); these are kept in order of appearance.  If
// the CRC fails, up to T_max further attempts are made, attempt t repeating
// the decoding with candidate t's flip applied, until the CRC passes.  The
// algorithm (node rules, threshold law, candidate order, T_max, CRC) follows
// the paper; the architecture (memory layout, schedule, word lengths,
// interfaces) is this design's own, since the paper only refers to an
// earlier Fast-SCF architecture for it.
//
// Interface: pulse `start` with `info_mask` (1 = non-frozen leaf) and
// `snr_db` (Eb/N0 in dB, SNR_FRAC fractional bits) valid; then N/P words of
// channel LLRs (QC-bit two's complement, LLR_FRAC fractional bits, lane i of
// word w is leaf w*P+i) are accepted on `in_valid && in_ready`.  When the
// frame is finished `done` pulses for one cycle with `u_hat` (all N decoded
// leaves), `crc_ok` and `attempts` (flip attempts made, 0 .. T_max) valid;
// they hold until the next `start`.
//
// Timing per attempt (cycles): one per f or g word (max(1, 2^(s-1)/P) for a
// parent at stage s), one per special node, one per step back up the tree,
// then N/P + 2 for the CRC check.
module ftscf_decoder #(
  parameter int unsigned N     = ftscf_pkg::N_DEF,
  parameter int unsigned P     = ftscf_pkg::P_DEF,
  parameter int unsigned QC    = ftscf_pkg::QC_DEF,
  parameter int unsigned QI    = ftscf_pkg::QI_DEF,
  parameter int unsigned TMAX  = ftscf_pkg::TMAX_DEF,
  parameter int unsigned SNR_W = ftscf_pkg::SNR_W_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [N-1:0]            info_mask,
  input  logic signed [SNR_W-1:0] snr_db,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [P-1:0][QC-1:0]    in_llr,
  output logic                    busy,
  output logic                    done,
  output logic                    crc_ok,
  output logic [$clog2(TMAX+1)-1:0] attempts,
  output logic [N-1:0]            u_hat,
  output logic [N-1:0]            x_hat     // estimated codeword of the last attempt
);
  import ftscf_pkg::*;

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned LOGP = $clog2(P);
  localparam int unsigned SW   = $clog2(LOGN + 1);
  localparam int unsigned NW   = N / P;               // channel words
  localparam int unsigned JW   = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned OW   = OMEGA_W;
  localparam int unsigned CW   = $clog2(TMAX + 1);

  // Word address of the LLRs of stage s: stage n first, then downwards.
  function automatic int unsigned stage_words(int unsigned s);
    return ((1 << s) >= P) ? (1 << s) / P : 1;
  endfunction
  function automatic int unsigned stage_base(int unsigned s);
    int unsigned a = 0;
    for (int unsigned t = LOGN; t > s; t--) a += stage_words(t);
    return a;
  endfunction
  typedef int unsigned base_t [LOGN+1];
  function automatic base_t all_bases();
    base_t b;
    for (int unsigned s = 0; s <= LOGN; s++) b[s] = stage_base(s);
    return b;
  endfunction
  localparam base_t       BASE  = all_bases();
  localparam int unsigned DEPTH = BASE[0] + 1;
  localparam int unsigned AW    = $clog2(DEPTH);

  // ---------------------------------------------------------------- state
  dec_state_e       state;
  logic [SW-1:0]    s;        // stage of the current node
  logic [LOGN-1:0]  k;        // index of the current node within its stage
  logic [JW-1:0]    j;        // word counter of an f, g or load step
  logic [CW-1:0]    attempt;  // 0: first attempt, t: flipping candidate t
  flip_cand_t       target;
  logic [OW-1:0]    omega_r;
  logic [N-1:0]     info_r;
  logic [N-1:0]     u_r;

  logic [OW-1:0]    omega_w;
  omega_approx #(.SNR_W(SNR_W), .OW(OW)) u_omega (.snr_db, .omega(omega_w));

  // ---------------------------------------------------------- node lookup
  logic [LOGN-1:0]  pos;      // first leaf of the current node
  node_kind_e       kind;
  assign pos = k << s;

  node_type #(.P(P), .SW(SW)) u_type (
    .chunk (info_r[(int'(pos) / P) * P +: P]),
    .off   (LOGP'(int'(pos) % P)),
    .s     (s),
    .kind  (kind)
  );

  // ------------------------------------------------------------ LLR path
  logic                  mem_we;
  logic [AW-1:0]         mem_waddr, mem_raddr0, mem_raddr1;
  logic [P-1:0][QI-1:0]  mem_wdata, rd0, rd1, pe_a, pe_b, pe_y;
  logic                  pe_g;
  logic [P-1:0]          beta_l;
  logic [SW-1:0]         ps_stage;   // stage of the parent of an f/g step

  llr_mem #(.P(P), .QI(QI), .DEPTH(DEPTH)) u_mem (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .raddr0(mem_raddr0), .raddr1(mem_raddr1), .rdata0(rd0), .rdata1(rd1)
  );

  pe_array #(.P(P), .QI(QI)) u_pe (.op_g(pe_g), .a(pe_a), .b(pe_b),
                                   .beta(beta_l), .y(pe_y));

  // ----------------------------------------------------- node decoders
  localparam int unsigned NSW = $clog2(LOGP + 1);
  logic [NSW-1:0]  ns;
  logic            hit;
  logic [P-1:0]    beta_r1, beta_rep, beta_spc, beta_node, u_node;
  logic            cand_r1, cand_rep;
  logic [1:0]      cand_spc;

  assign ns  = NSW'(s);
  assign hit = (attempt != '0) && (target.start == 16'(pos));

  rate1_node #(.P(P), .QI(QI), .OW(OW)) u_r1 (
    .llr(rd0), .s(ns), .omega(omega_r), .flip(hit && kind == NODE_R1),
    .beta(beta_r1), .cand(cand_r1), .cand_idx());
  rep_node #(.P(P), .QI(QI), .OW(OW)) u_rep (
    .llr(rd0), .s(ns), .omega(omega_r), .flip(hit && kind == NODE_REP),
    .beta(beta_rep), .cand(cand_rep));
  spc_node #(.P(P), .QI(QI), .OW(OW)) u_spc (
    .llr(rd0), .s(ns), .omega(omega_r), .flip(hit && kind == NODE_SPC),
    .sel(target.sel), .beta(beta_spc), .cand(cand_spc));

  always_comb begin
    unique case (kind)
      NODE_R1:  beta_node = beta_r1;
      NODE_REP: beta_node = beta_rep;
      NODE_SPC: beta_node = beta_spc;
      default:  beta_node = '0;
    endcase
    // Leaf values u = beta * G^(x s): butterflies of the node's own stages.
    u_node = beta_node;
    for (int t = 0; t < LOGP; t++)
      if (t < int'(s))
        for (int i = 0; i < P; i++)
          if (((i >> t) & 1) == 0) u_node[i] = u_node[i] ^ u_node[i + (1 << t)];
  end

  // ---------------------------------------------------- flip candidates
  logic [1:0]            fl_push;
  flip_cand_t [1:0]      fl_entry;
  flip_cand_t            fl_rd;
  logic [CW-1:0]         fl_count;
  logic                  fl_clear;

  flip_list #(.DEPTH(TMAX)) u_flips (
    .clk, .rst_n, .clear(fl_clear), .push(fl_push), .entry(fl_entry),
    .rd_idx(attempt), .rd_entry(fl_rd), .count(fl_count));

  // ---------------------------------------------------- partial sums, CRC
  logic            nw_en, cb_en;
  logic [LOGN-1:0] cb_pos, rd_pos;
  logic            crc_start, crc_done, crc_pass;

  psum_mem #(.N(N), .P(P)) u_psum (
    .clk, .rst_n, .nw_en, .nw_pos(pos), .nw_s(s), .nw_data(beta_node),
    .cb_en, .cb_s(s), .cb_pos, .rd_pos, .rd_data(beta_l), .x_hat);

  crc_check #(.N(N), .P(P)) u_crc (
    .clk, .rst_n, .start(crc_start), .u(u_r), .info(info_r),
    .busy(), .done(crc_done), .ok(crc_pass));

  // -------------------------------------------------- datapath control
  logic last_word;   // final word of the current f / g / load step

  always_comb begin
    int unsigned half;
    mem_we     = 1'b0;
    mem_waddr  = '0;
    mem_wdata  = '0;
    mem_raddr0 = AW'(BASE[s]);
    mem_raddr1 = mem_raddr0;
    pe_g       = (state == ST_G);
    ps_stage   = (state == ST_G) ? s + 1'b1 : s;
    half       = (1 << ps_stage) >> 1;
    nw_en      = 1'b0;
    cb_en      = 1'b0;
    cb_pos     = LOGN'({1'b0, k[LOGN-1:1]} << (int'(s) + 1));
    rd_pos     = LOGN'(int'(pos) + int'(j) * P);
    fl_push    = '0;
    fl_entry   = '{default: '0};
    fl_clear   = (state == ST_IDLE) && start;
    crc_start  = (state == ST_CRC);
    in_ready   = (state == ST_LOAD);
    last_word  = 1'b0;

    // parent halves for f and g
    if (half >= P) begin
      mem_raddr0 = AW'(BASE[ps_stage] + int'(j));
      mem_raddr1 = AW'(BASE[ps_stage] + int'(j) + half / P);
      pe_a = rd0;
      pe_b = rd1;
      last_word = (int'(j) == half / P - 1);
    end else begin
      if (state == ST_G || state == ST_DESC) mem_raddr0 = AW'(BASE[ps_stage]);
      pe_a = rd0;
      pe_b = rd0 >> (half * QI);
      last_word = 1'b1;
    end

    unique case (state)
      ST_LOAD: begin
        mem_we    = in_valid;
        mem_waddr = AW'(int'(j));
        for (int i = 0; i < P; i++) begin
          logic signed [QC-1:0] v;
          v = signed'(in_llr[i]);
          if (v == signed'({1'b1, {(QC-1){1'b0}}})) v = v + 1'b1;  // symmetric range
          mem_wdata[i] = QI'(v);
        end
        last_word = (int'(j) == NW - 1);
      end
      ST_DESC: begin
        if (kind != NODE_NONE) begin
          mem_raddr0 = AW'(BASE[s]);
          nw_en = 1'b1;
          if (attempt == '0) begin
            fl_entry[0] = '{start: 16'(pos), sel: 1'b0};
            fl_entry[1] = '{start: 16'(pos), sel: 1'b1};
            unique case (kind)
              NODE_R1:  fl_push = {1'b0, cand_r1};
              NODE_REP: fl_push = {1'b0, cand_rep};
              NODE_SPC: fl_push = cand_spc;
              default:  fl_push = '0;
            endcase
          end
        end else begin
          mem_we    = 1'b1;
          mem_waddr = AW'(BASE[s - 1'b1] + int'(j));
          mem_wdata = pe_y;
        end
      end
      ST_G: begin
        mem_we    = 1'b1;
        mem_waddr = AW'(BASE[s] + int'(j));
        mem_wdata = pe_y;
      end
      ST_UP: begin
        cb_en = (int'(s) != LOGN) && k[0];
      end
      default: ;
    endcase
  end

  // ----------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      s        <= '0;
      k        <= '0;
      j        <= '0;
      attempt  <= '0;
      target   <= '0;
      omega_r  <= '0;
      info_r   <= '0;
      u_r      <= '0;
      done     <= 1'b0;
      crc_ok   <= 1'b0;
      attempts <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          info_r  <= info_mask;
          omega_r <= omega_w;
          j       <= '0;
          state   <= ST_LOAD;
        end
        ST_LOAD: if (in_valid) begin
          j <= j + 1'b1;
          if (last_word) begin
            j       <= '0;
            s       <= SW'(LOGN);
            k       <= '0;
            attempt <= '0;
            state   <= ST_DESC;
          end
        end
        ST_DESC: begin
          if (kind != NODE_NONE) begin
            for (int i = 0; i < P; i++)
              if (i < (1 << s)) u_r[(int'(pos) / P) * P + (int'(pos) % P) + i] <= u_node[i];
            state <= ST_UP;
          end else begin
            j <= j + 1'b1;
            if (last_word) begin
              j <= '0;
              s <= s - 1'b1;
              k <= k << 1;
            end
          end
        end
        ST_UP: begin
          if (int'(s) == LOGN) begin
            state <= ST_CRC;
          end else if (k[0]) begin
            s <= s + 1'b1;
            k <= k >> 1;
          end else begin
            j     <= '0;
            state <= ST_G;
          end
        end
        ST_G: begin
          j <= j + 1'b1;
          if (last_word) begin
            j     <= '0;
            k     <= k + 1'b1;
            state <= ST_DESC;
          end
        end
        ST_CRC: state <= ST_CRC_WAIT;
        ST_CRC_WAIT: if (crc_done) begin
          if (crc_pass) begin
            crc_ok   <= 1'b1;
            attempts <= attempt;
            done     <= 1'b1;
            state    <= ST_DONE;
          end else if (int'(attempt) < TMAX && attempt < fl_count) begin
            target  <= fl_rd;
            attempt <= attempt + 1'b1;
            s       <= SW'(LOGN);
            k       <= '0;
            j       <= '0;
            state   <= ST_DESC;
          end else begin
            crc_ok   <= 1'b0;
            attempts <= attempt;
            done     <= 1'b1;
            state    <= ST_DONE;
          end
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy  = (state != ST_IDLE) && (state != ST_DONE);
  assign u_hat = u_r;

  // A frame's node decisions must not be written while the CRC reads u.
  a_no_write_in_crc: assert property (@(posedge clk) disable iff (!rst_n)
    (state == ST_CRC_WAIT) |-> !nw_en);
endmodule
