// ernn_gru_cu: compute unit for one GRU layer with block-circulant weights.
//
// One CU runs one input sequence. Each start evaluates one time step
//   z = sigma(W_zx x + W_zc c' + b_z)      r = sigma(W_rx x + W_rc c' + b_r)
//   ~c = tanh(W_~cx x + W_~cc (r . c') + b_~c)
//   c = (1 - z) . c' + z . ~c             (c' = c of the previous step)
// with three coarse-grained pipeline stages:
//   stage 1  W_(rz)(xc) [x; c']: all PEs, one group of NPE output blocks at a
//            time (job A, output blocks 0..QH-1 are r, QH..2QH-1 are z);
//   stage 2  W_~cx x + W_~cc (r . c') as one product with [x; r . c'] (job B);
//            it reuses the PEs of stage 1 by time-division multiplexing;
//   stage 3  bias adder, sigma/tanh and the element-wise unit, fed through a
//            double buffer so it works on one group while the PEs compute the
//            next.
// Before each job the input blocks are passed once through the PE front
// halves and their spectra kept in a spectrum buffer (FFT/IFFT decoupling);
// job B transforms only the r . c' blocks and reuses the spectra of x.
//
// Memories, as in the paper's GRU figure: BRAM 1 holds [x; c'] (vec_x,
// vec_c), BRAM 2 the spectra of W_(rz)(xc) and W_~cx, BRAM 3 the biases,
// BRAM 4 the spectra of W_~cc. BRAM 2 and 4 are split into NPE banks, bank k
// feeding PE k: PE k computes output blocks i with i mod NPE = k.
//   BRAM 2 bank k, job A group g, input block j:  address g*Q + j
//   BRAM 2 bank k, job B group g, x block j:       address GA*Q + g*QX + j
//   BRAM 4 bank k, job B group g, c block j:       address g*QH + j
//   BRAM 3: b_r blocks 0..QH-1, b_z QH..2QH-1, b_~c 2QH..3QH-1
// The element-wise unit follows the figure: r . c' has its own multipliers;
// c is formed by one multiplier lane per element behind a multiplexer,
// first z . ~c, then (1 - z) . c', added to the first product.
// The order of r and z, the address maps, the banking and all handshakes are
// this design's choices; the paper gives the stages, memories and units.
//
// Interface:
//   wr_*      write port for BRAM 2/3/4 and the x part of BRAM 1 (idle only)
//   clear     zeroes c' (start of a sequence), QH cycles, busy meanwhile
//   start     runs one time step; done pulses when c has been written
//   out_*     the new c, one block per out_valid, index out_idx
// Timing: a step takes about (GA + GB) * Q cycles for the PE jobs plus a
// few tens of cycles of pipeline fill and drain.
//
// Lint notes: addresses are carried as 16-bit counters and index memories
// that need fewer bits (WIDTHTRUNC/WIDTHEXPAND); every such index is
// bounded by the address maps above or guarded by a range compare, so the
// dropped upper bits are always zero. The upper bits of wr_bank/wr_addr are
// unused for the same reason (they allow larger configurations on the same
// bus). rst_n is also sampled synchronously by the 'disable iff' of the
// assertions at the end, which gives the SYNCASYNCNET note; the circuit
// itself only uses it as an asynchronous reset.
module ernn_gru_cu
  import ernn_pkg::*;
#(
  parameter int unsigned N   = LB,
  parameter int unsigned H   = HID,
  parameter int unsigned DX  = DIN,
  parameter int unsigned NPE = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  tgt_e                    wr_tgt,
  input  logic [7:0]              wr_bank,
  input  logic [15:0]             wr_addr,
  input  logic [N*DW-1:0]         wr_data,
  input  logic                    clear,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic                    out_valid,
  output logic [15:0]             out_idx,
  output logic [N*DW-1:0]         out_data
);
  localparam int unsigned QX = DX / N;
  localparam int unsigned QH = H / N;
  localparam int unsigned Q  = QX + QH;
  localparam int unsigned GA = 2 * QH / NPE;
  localparam int unsigned GB = QH / NPE;
  localparam int unsigned D2 = GA * Q + GB * QX;
  localparam int unsigned D4 = GB * QH;
  localparam int unsigned BW = N * DW;          // one block of data or weights
  localparam int unsigned SBW = N * SW;         // one stored spectrum
  localparam int unsigned PBW = N * PW;         // one pre-activation block
  localparam int unsigned EB = (NPE > 1) ? $clog2(NPE) : 1;
  localparam logic signed [DW:0] ONE = (DW+1)'(1 << FRAC);

  typedef logic signed [DW-1:0] dvec_t [N];
  typedef logic signed [SW-1:0] svec_t [N];

  function automatic dvec_t unpack_d(input logic [BW-1:0] b);
    dvec_t v;
    for (int n = 0; n < N; n++) v[n] = b[n*DW +: DW];
    return v;
  endfunction
  function automatic svec_t unpack_s(input logic [SBW-1:0] b);
    svec_t v;
    for (int n = 0; n < N; n++) v[n] = b[n*SW +: SW];
    return v;
  endfunction

  // fixed-point product a*b with FRAC fraction bits, rounded, saturated to DW
  function automatic logic signed [DW-1:0] fmul(input logic signed [DW:0] a,
                                                input logic signed [DW:0] b);
    logic signed [2*DW+1:0] p;
    p = (2*DW+2)'(a * b) + (2*DW+2)'(1 << (FRAC - 1));
    return sat_dw(64'(p >>> FRAC));
  endfunction

  // ------------------------------------------------------------------ memories
  logic [BW-1:0]  vec_x  [QX];           // BRAM 1, x part
  logic [BW-1:0]  vec_c  [QH];           // BRAM 1, c part
  logic [BW-1:0]  bram2  [NPE][D2];
  logic [BW-1:0]  bram3  [3*QH];
  logic [BW-1:0]  bram4  [NPE][D4];
  logic [SBW-1:0] spec   [Q];            // spectra of the current job's inputs
  logic [BW-1:0]  rc_mem [QH];           // r . c'
  logic [BW-1:0]  z_mem  [QH];

  // ------------------------------------------------------------------ control
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_FFT, S_MAC, S_WAIT, S_DONE} state_e;
  state_e state;
  logic   job_b;                         // 0: job A (r, z), 1: job B (~c)
  logic [15:0] cnt;                      // block / column counter
  logic [15:0] grp;                      // group counter within the job
  logic [3:0]  drain;
  logic [3:0]  inflight;                 // groups issued, results not yet collected
  logic [15:0] post_g;                   // groups consumed by stage 3 this step
  logic        grp_active;

  // PE array signals
  logic                 fin_valid [NPE];
  logic signed [DW-1:0] fin_data  [NPE][N];
  logic                 fout_valid[NPE];
  logic signed [SW-1:0] fout_spec [NPE][N];
  logic [15:0]          fin_blk   [NPE];
  logic [15:0]          fout_blk  [NPE];
  logic                 mac_valid, mac_first, mac_last;
  logic signed [SW-1:0] mac_spec  [N];
  logic signed [DW-1:0] mac_w     [NPE][N];
  logic                 res_valid [NPE];
  logic signed [PW-1:0] res_data  [NPE][N];

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    ernn_pe #(.N(N)) u_pe (
      .clk, .rst_n,
      .fin_valid(fin_valid[k]), .fin_data(fin_data[k]),
      .fout_valid(fout_valid[k]), .fout_spec(fout_spec[k]),
      .mac_valid, .mac_first, .mac_last, .mac_spec, .mac_w(mac_w[k]),
      .res_valid(res_valid[k]), .res_data(res_data[k]));
  end

  // collector -> double buffer
  logic [PBW-1:0] col_data [NPE];
  logic [1:0]     db_free;
  logic           db_valid, db_release;
  logic [EB-1:0]  db_addr;
  logic [PBW-1:0] db_data;

  always_comb
    for (int k = 0; k < NPE; k++)
      for (int n = 0; n < N; n++) col_data[k][n*PW +: PW] = res_data[k][n];

  ernn_dbuf #(.DEPTH(NPE), .EW(PBW)) u_dbuf (
    .clk, .rst_n, .wr_en(res_valid[0]), .wr_data(col_data), .n_free(db_free),
    .rd_valid(db_valid), .rd_addr(db_addr), .rd_data(db_data), .rd_release(db_release));

  // ------------------------------------------------------------------ host writes
  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_tgt)
        TGT_W_XC:  bram2[wr_bank[EB-1:0]][wr_addr] <= wr_data;
        TGT_W_CC:  bram4[wr_bank[EB-1:0]][wr_addr] <= wr_data;
        TGT_BIAS:  bram3[wr_addr] <= wr_data;
        TGT_INPUT: vec_x[wr_addr] <= wr_data;
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ stage 1/2 issue
  localparam int unsigned NFFT_A = (Q + NPE - 1) / NPE;
  localparam int unsigned NFFT_B = (QH + NPE - 1) / NPE;
  logic        iss_fft;           // FFT issue this cycle
  logic        iss_mac;           // MAC issue this cycle
  logic [15:0] iss_j, iss_g;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; job_b <= 1'b0; cnt <= '0; grp <= '0; drain <= '0;
      grp_active <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt <= '0; grp <= '0; job_b <= 1'b0; grp_active <= 1'b0;
          if (clear)      state <= S_CLR;
          else if (start) state <= S_FFT;
        end
        S_CLR: begin
          cnt <= cnt + 1;
          if (cnt == 16'(QH - 1)) begin cnt <= '0; state <= S_IDLE; end
        end
        S_FFT: begin
          if (cnt < 16'(job_b ? NFFT_B : NFFT_A)) cnt <= cnt + 1;
          else if (drain == 4'd2) begin
            drain <= '0; cnt <= '0; grp <= '0; state <= S_MAC;
          end else drain <= drain + 1;
        end
        S_MAC: begin
          if (!grp_active) begin
            if (4'(db_free) > inflight) begin grp_active <= 1'b1; cnt <= '0; end
          end else begin
            cnt <= cnt + 1;
            if (cnt == 16'(Q - 1)) begin
              grp_active <= 1'b0;
              grp <= grp + 1;
              if (grp == 16'((job_b ? GB : GA) - 1)) state <= S_WAIT;
            end
          end
        end
        S_WAIT: begin
          // all groups of the job consumed by stage 3
          if (post_g == 16'(job_b ? GA + GB : GA) && inflight == 0) begin
            cnt <= '0; grp <= '0;
            if (job_b) state <= S_DONE;
            else begin job_b <= 1'b1; state <= S_FFT; end
          end
        end
        S_DONE: begin
          done <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign iss_fft = (state == S_FFT) && (cnt < 16'(job_b ? NFFT_B : NFFT_A));
  assign iss_mac = (state == S_MAC) && grp_active;
  assign iss_j   = cnt;
  assign iss_g   = grp;

  // inflight groups: +1 when a group starts, -1 when the collector writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 4'((state == S_MAC && !grp_active && 4'(db_free) > inflight) ? 1 : 0)
                              - 4'(res_valid[0] ? 1 : 0);
  end

  // FFT issue: PE k transforms input block cnt*NPE + k (registered read)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NPE; k++) begin
        fin_valid[k] <= 1'b0; fin_blk[k] <= '0; fout_blk[k] <= '0;
        for (int n = 0; n < N; n++) fin_data[k][n] <= '0;
      end
    end else begin
      for (int k = 0; k < NPE; k++) begin
        int unsigned b;
        b = job_b ? QX + iss_j * NPE + k : iss_j * NPE + k;
        fin_valid[k] <= iss_fft && (b < Q);
        fin_blk[k]   <= 16'(b);
        if (iss_fft && b < Q) begin
          if (b < QX)       fin_data[k] <= unpack_d(vec_x[b]);
          else if (!job_b)  fin_data[k] <= unpack_d(vec_c[b - QX]);
          else              fin_data[k] <= unpack_d(rc_mem[b - QX]);
        end
        fout_blk[k] <= fin_blk[k];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NPE; k++)
      if (fout_valid[k]) spec[fout_blk[k]] <= {<<SW{fout_spec[k]}};
  end

  // MAC issue: registered reads of the spectrum buffer and the weight banks
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_valid <= 1'b0; mac_first <= 1'b0; mac_last <= 1'b0;
      for (int n = 0; n < N; n++) mac_spec[n] <= '0;
      for (int k = 0; k < NPE; k++) for (int n = 0; n < N; n++) mac_w[k][n] <= '0;
    end else begin
      mac_valid <= iss_mac;
      mac_first <= iss_mac && (iss_j == 0);
      mac_last  <= iss_mac && (iss_j == 16'(Q - 1));
      if (iss_mac) begin
        mac_spec <= unpack_s(spec[iss_j]);
        for (int k = 0; k < NPE; k++) begin
          if (!job_b)            mac_w[k] <= unpack_d(bram2[k][iss_g * Q + iss_j]);
          else if (iss_j < QX)   mac_w[k] <= unpack_d(bram2[k][GA * Q + iss_g * QX + iss_j]);
          else                   mac_w[k] <= unpack_d(bram4[k][iss_g * QH + iss_j - QX]);
        end
      end
    end
  end

  // ------------------------------------------------------------------ stage 3
  // per block: P_RD reads bias, c', z; P_C1 adds bias, activates and (job A)
  // writes r . c' or z, or (job B) forms z . ~c; P_C2 adds (1 - z) . c'.
  typedef enum logic [1:0] {P_IDLE, P_RD, P_C1, P_C2} pstate_e;
  pstate_e pst;
  logic [EB-1:0]  pe_idx;
  logic [15:0]    blk_i;                 // output block index within the job
  logic           post_b;                // block belongs to job B
  logic [BW-1:0]  bias_q, c_q, z_q;
  logic signed [PW-1:0] pre  [N];
  logic signed [DW-1:0] act  [N];
  logic signed [DW-1:0] zc_q [N];        // z . ~c of the current block
  logic [BW-1:0]        rc_new, c_new;   // r . c' and the new c of the block

  assign post_b  = (post_g >= 16'(GA));
  assign blk_i   = (post_b ? post_g - 16'(GA) : post_g) * 16'(NPE) + 16'(pe_idx);
  assign db_addr = pe_idx;

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [PW:0] s;
      s = (PW+1)'($signed(db_data[n*PW +: PW])) + (PW+1)'($signed(bias_q[n*DW +: DW]));
      if (s > (PW+1)'((1 << (PW - 1)) - 1))  pre[n] = PW'((1 << (PW - 1)) - 1);
      else if (s < -(PW+1)'(1 << (PW - 1))) pre[n] = PW'(-(1 << (PW - 1)));
      else                                  pre[n] = s[PW-1:0];
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_act
    ernn_act u_act (.x(pre[n]), .is_tanh(post_b), .y(act[n]));
  end

  // multiplexed multiplier lanes: phase C1 -> z * ~c, phase C2 -> (1 - z) * c'
  logic signed [DW:0]   mux_a [N], mux_b [N];
  logic signed [DW-1:0] mux_p [N];
  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [DW:0] zz;
      zz = (DW+1)'($signed(z_q[n*DW +: DW]));
      mux_a[n] = (pst == P_C2) ? ONE - zz : zz;
      mux_b[n] = (pst == P_C2) ? (DW+1)'($signed(c_q[n*DW +: DW])) : (DW+1)'(act[n]);
      mux_p[n] = fmul(mux_a[n], mux_b[n]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst <= P_IDLE; pe_idx <= '0; post_g <= '0; db_release <= 1'b0;
      bias_q <= '0; c_q <= '0; z_q <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0;
      for (int n = 0; n < N; n++) zc_q[n] <= '0;
    end else begin
      db_release <= 1'b0;
      out_valid  <= 1'b0;
      if (state == S_IDLE && start) post_g <= '0;
      unique case (pst)
        P_IDLE: if (db_valid && !db_release) begin pst <= P_RD; pe_idx <= '0; end
        P_RD: begin
          bias_q <= bram3[post_b ? 16'(2 * QH) + blk_i : blk_i];
          c_q    <= vec_c[(!post_b && blk_i >= QH) ? blk_i - 16'(QH) : blk_i];
          z_q    <= z_mem[post_b ? blk_i : 16'(0)];
          pst    <= P_C1;
        end
        P_C1: begin
          if (!post_b) pst <= P_RD;
          else begin
            zc_q <= mux_p;
            pst  <= P_C2;
          end
          if (!post_b) begin
            if (pe_idx == EB'(NPE - 1)) begin
              pst <= P_IDLE; db_release <= 1'b1; post_g <= post_g + 1;
            end else pe_idx <= pe_idx + 1;
          end
        end
        P_C2: begin
          out_data  <= c_new;
          out_valid <= 1'b1;
          out_idx   <= blk_i;
          if (pe_idx == EB'(NPE - 1)) begin
            pst <= P_IDLE; db_release <= 1'b1; post_g <= post_g + 1;
          end else begin
            pe_idx <= pe_idx + 1; pst <= P_RD;
          end
        end
        default: pst <= P_IDLE;
      endcase
    end
  end

  // memory writes of stage 3 (and the clearing of c')
  always_comb begin
    for (int n = 0; n < N; n++) begin
      rc_new[n*DW +: DW] = fmul((DW+1)'(act[n]), (DW+1)'($signed(c_q[n*DW +: DW])));
      c_new[n*DW +: DW]  = sat_dw(64'(zc_q[n]) + 64'(mux_p[n]));
    end
  end

  always_ff @(posedge clk) begin
    if (pst == P_C1 && !post_b) begin
      if (blk_i < 16'(QH)) rc_mem[blk_i] <= rc_new;
      else                 z_mem[blk_i - 16'(QH)] <= {<<DW{act}};
    end
    if (pst == P_C2)        vec_c[blk_i] <= c_new;
    else if (state == S_CLR) vec_c[cnt] <= '0;
  end

  // rules of the host port and of the pipeline
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> state == S_IDLE);
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
  a_collect_room: assert property (@(posedge clk) disable iff (!rst_n) res_valid[0] |-> db_free != 0);

endmodule
