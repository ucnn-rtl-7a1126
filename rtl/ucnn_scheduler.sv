// ucnn_scheduler: layer dataflow controller of the UCNN accelerator.
//
// Runs one convolutional layer (unit stride) with the dataflow of the source:
//   (A) filters are fetched from DRAM in chunks of K_c filters that fill the
//       L2 weight store (the L2 is weight-stationary; every weight is read
//       from DRAM once per layer);
//   (B) work is spread over the P PEs as (output-column group, filter group)
//       jobs: a PE computes V_W adjacent output columns for the G filters
//       that share one indirection table, over all output rows;
//   (C) for each C_t-channel tile the job's tables are loaded into the PE's
//       L1 over the weight bus, multicast to every PE of the round working on
//       the same filter group;
//   (D) for each output row the input window is loaded over the input bus,
//       multicast to every PE working on the same columns; after the first
//       row only the one new input row is sent (slide reuse);
//   (E) the PEs compute the row's dot products for the tile (output
//       stationary: partial sums stay in the PE);
//   (F) after the last tile the ReLU'd outputs are written to the other L2
//       half.
// PEs of a round run in lock step: loads are serial on the buses, then all
// PEs compute the row together. The unique weights of the layer are
// broadcast once to every PE's weight buffer at the start of the layer.
//
// DRAM image of a layer, from word address dram_base (this design's format):
//   u unique weights in canonical order, then for filter group f and channel
//   tile t the record at dram_base + u + (f*NCT + t)*REC_WORDS: one count n
//   followed by n table words {wiT, iiT}.
// L2 activation layout: in[c][y][x] at (c*H + y)*W + x; outputs likewise
// out[k][y][x] at (k*Ho + y)*Wo + x.
//
// DRAM port: one outstanding read; `dram_req_valid/ready` then
// `dram_rsp_valid` with the data. Event counters (multicast, slide
// loads, chunks, rounds, padded words) are outputs for performance study.
module ucnn_scheduler
  import ucnn_pkg::*;
#(
  parameter int unsigned P         = NUM_PE,
  parameter int unsigned V         = VW,
  parameter int unsigned G         = GF,
  parameter int unsigned U         = NUM_U,
  parameter int unsigned HMAX      = H_MAX,
  parameter int unsigned ACT_WORDS = L2_ACT_WORDS,
  parameter int unsigned WT_WORDS  = L2_WT_WORDS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         busy,
  output logic                         done,
  output logic                         error,
  // DRAM
  output logic                         dram_req_valid,
  output logic [31:0]                  dram_req_addr,
  input  logic                         dram_req_ready,
  input  logic                         dram_rsp_valid,
  input  logic [WORD_W-1:0]            dram_rsp_data,
  // L2
  output logic                         act_rd_en,
  output logic [$clog2(ACT_WORDS)-1:0] act_rd_addr,
  input  logic [WORD_W-1:0]            act_rd_data,
  output logic                         act_wr_en,
  output logic [$clog2(ACT_WORDS)-1:0] act_wr_addr,
  output logic [WORD_W-1:0]            act_wr_data,
  output logic                         wt_wr_en,
  output logic [$clog2(WT_WORDS)-1:0]  wt_wr_addr,
  output logic [WORD_W-1:0]            wt_wr_data,
  output logic                         wt_rd_en,
  output logic [$clog2(WT_WORDS)-1:0]  wt_rd_addr,
  input  logic [WORD_W-1:0]            wt_rd_data,
  // buses
  output l1_wr_t                       in_bus,
  output logic [P-1:0]                 in_dest,
  output l1_wr_t                       wt_bus,
  output logic [P-1:0]                 wt_dest,
  // PEs
  output logic [P-1:0]                 pe_start,
  output logic [$clog2(HMAX)-1:0]      pe_start_h,
  output logic                         pe_start_first,
  input  logic [P-1:0]                 pe_done,
  output logic [$clog2(HMAX)-1:0]      pe_rd_h,
  output logic [$clog2(V)-1:0]         pe_rd_v,
  output logic [(G>1?$clog2(G):1)-1:0] pe_rd_g,
  input  logic [ACT_W-1:0]             pe_rd_act [P],
  // statistics
  output logic [31:0]                  n_slide_rows,
  output logic [31:0]                  n_chunks,
  output logic [31:0]                  n_rounds,
  output logic [31:0]                  n_pad_words,
  output logic [31:0]                  n_row_runs
);

  localparam int unsigned NCOL  = R_T + V - 1;
  localparam int unsigned AA_W  = $clog2(ACT_WORDS);
  localparam int unsigned WA_W  = $clog2(WT_WORDS);
  localparam int unsigned PI_W  = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned GI_W  = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned HA_W  = $clog2(HMAX);

  typedef enum logic [4:0] {
    S_IDLE, S_SETUP, S_KC, S_WFETCH, S_WBCAST, S_WBCAST_END,
    S_CHUNK, S_FETCH_HDR, S_FETCH_WORDS,
    S_ASSIGN, S_TILE, S_TBL_PE, S_TBL_HDR, S_TBL_HDR_WAIT, S_TBL_STREAM,
    S_ROW, S_INP_PE, S_INP_STREAM, S_RUN, S_WAIT, S_WB, S_WB_WRITE,
    S_NEXT_ROUND, S_DONE, S_ERR
  } state_e;

  state_e state;
  layer_cfg_t c;

  // derived layer sizes
  logic [15:0] wo, ho, nct, ncg, nfg, kc;
  logic [31:0] kc_rem;           // scratch for the K_c division loop
  logic [31:0] rec_per_fg;       // NCT * REC_WORDS

  // loop counters
  logic [15:0] fg0;              // first filter group of this chunk
  logic [15:0] nfg_chunk;        // filter groups in this chunk
  logic [15:0] f_l, t_l;         // fetch loop: filter group in chunk, tile
  logic [15:0] widx;             // word index in a record / weight list
  logic [15:0] rec_n;            // words in the current record
  logic [15:0] job_cg, job_fg;   // next job to assign
  logic [PI_W:0] pidx;           // PE iterator
  logic [15:0] pe_cg [P];
  logic [15:0] pe_fg [P];
  logic [P-1:0] pe_act;
  logic [15:0] ct, hrow;
  logic [3:0]  yi;               // input row within the rows to load
  logic [COL_W-1:0] col;
  logic [C_W-1:0]   ch;
  logic [P-1:0]     done_seen;
  logic [HA_W-1:0]  wb_h;
  logic [$clog2(V)-1:0] wb_v;
  logic [GI_W-1:0]  wb_g;

  // L2 read-to-bus pipeline register
  // (stage q: read issued; stage q2: read data on the L2 output)
  logic         q_valid, q_pad, q_bus_in;
  l1_wr_t       q_word;
  logic [P-1:0] q_dest;
  logic         q2_valid, q2_pad, q2_bus_in;
  l1_wr_t       q2_word;
  logic [P-1:0] q2_dest;
  logic         dram_out;      // a DRAM read has been accepted, data pending
  logic [2:0]   settle;

  assign busy = (state != S_IDLE);

  // masks of PEs sharing the column group / filter group of PE pidx
  logic [P-1:0] same_cg, same_fg;
  always_comb begin
    for (int p = 0; p < P; p++) begin
      same_cg[p] = pe_act[p] && (pe_cg[p] == pe_cg[PI_W'(pidx)]);
      same_fg[p] = pe_act[p] && (pe_fg[p] == pe_fg[PI_W'(pidx)]);
    end
  end

  // first PE of its column group / filter group in this round
  logic first_cg, first_fg;
  always_comb begin
    first_cg = 1'b1;
    first_fg = 1'b1;
    for (int p = 0; p < P; p++) begin
      if (p < int'(pidx) && pe_act[p] && pe_cg[p] == pe_cg[PI_W'(pidx)]) first_cg = 1'b0;
      if (p < int'(pidx) && pe_act[p] && pe_fg[p] == pe_fg[PI_W'(pidx)]) first_fg = 1'b0;
    end
  end

  // input row to load: rows 0..S-1 for the first output row, else row h+S-1
  logic [15:0] in_y, in_x, in_c;
  logic        in_pad;
  always_comb begin
    in_y   = (hrow == 0) ? 16'(yi) : hrow + 16'(c.s) - 1'b1;
    in_x   = pe_cg[PI_W'(pidx)] * 16'(V) + 16'(col);
    in_c   = ct * 16'(C_T) + 16'(ch);
    in_pad = (in_x >= c.w) || (in_c >= c.c);
  end

  // output coordinates during write-back
  logic [15:0] wb_k, wb_x;
  logic        wb_ok;
  always_comb begin
    wb_k  = (fg0 + pe_fg[PI_W'(pidx)]) * 16'(G) + 16'(wb_g);
    wb_x  = pe_cg[PI_W'(pidx)] * 16'(V) + 16'(wb_v);
    wb_ok = (wb_k < c.k) && (wb_x < wo);
  end

  // DRAM and L2 addresses of the table record being fetched
  logic [31:0] rec_dram, rec_l2;
  assign rec_dram = c.dram_base + 32'(c.u) + (32'(fg0 + f_l) * 32'(nct) + 32'(t_l)) * REC_WORDS;
  assign rec_l2   = L2_U_SLOT + (32'(f_l) * 32'(nct) + 32'(t_l)) * REC_WORDS;

  assign pe_rd_h = wb_h;
  assign pe_rd_v = wb_v;
  assign pe_rd_g = wb_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      done <= 1'b0; error <= 1'b0;
      dram_req_valid <= 1'b0; dram_req_addr <= '0;
      act_rd_en <= 1'b0; act_rd_addr <= '0;
      act_wr_en <= 1'b0; act_wr_addr <= '0; act_wr_data <= '0;
      wt_wr_en <= 1'b0; wt_wr_addr <= '0; wt_wr_data <= '0;
      wt_rd_en <= 1'b0; wt_rd_addr <= '0;
      in_bus <= '0; in_dest <= '0; wt_bus <= '0; wt_dest <= '0;
      pe_start <= '0; pe_start_h <= '0; pe_start_first <= 1'b0;
      q_valid <= 1'b0; q_pad <= 1'b0; q_bus_in <= 1'b0; q_word <= '0; q_dest <= '0;
      q2_valid <= 1'b0; q2_pad <= 1'b0; q2_bus_in <= 1'b0; q2_word <= '0; q2_dest <= '0;
      dram_out <= 1'b0; settle <= '0;
      wo <= '0; ho <= '0; nct <= '0; ncg <= '0; nfg <= '0; kc <= '0; kc_rem <= '0; rec_per_fg <= '0;
      fg0 <= '0; nfg_chunk <= '0; f_l <= '0; t_l <= '0; widx <= '0; rec_n <= '0;
      job_cg <= '0; job_fg <= '0; pidx <= '0; pe_act <= '0;
      for (int p = 0; p < P; p++) begin pe_cg[p] <= '0; pe_fg[p] <= '0; end
      ct <= '0; hrow <= '0; yi <= '0; col <= '0; ch <= '0; done_seen <= '0;
      wb_h <= '0; wb_v <= '0; wb_g <= '0;
      n_slide_rows <= '0; n_chunks <= '0; n_rounds <= '0; n_pad_words <= '0; n_row_runs <= '0;
    end else begin
      done      <= 1'b0;
      act_rd_en <= 1'b0;
      act_wr_en <= 1'b0;
      wt_wr_en  <= 1'b0;
      wt_rd_en  <= 1'b0;
      pe_start  <= '0;
      in_bus.valid <= 1'b0;
      wt_bus.valid <= 1'b0;

      // L2 read data arrives one cycle after the read: put it on a bus
      q_valid   <= 1'b0;
      q2_valid  <= q_valid;
      q2_pad    <= q_pad;
      q2_bus_in <= q_bus_in;
      q2_word   <= q_word;
      q2_dest   <= q_dest;
      if (q2_valid) begin
        if (q2_bus_in) begin
          in_bus <= q2_word;
          in_bus.data <= q2_pad ? '0 : act_rd_data;
          in_dest <= q2_dest;
        end else begin
          wt_bus <= q2_word;
          wt_bus.data <= wt_rd_data;
          wt_dest <= q2_dest;
        end
      end
      // DRAM: one read outstanding at a time
      if (dram_req_valid && dram_req_ready) begin
        dram_req_valid <= 1'b0;
        dram_out       <= 1'b1;
      end
      if (dram_rsp_valid) dram_out <= 1'b0;

      case (state)
        S_IDLE: begin
          if (start) begin
            c     <= cfg;
            state <= S_SETUP;
          end
        end
        S_SETUP: begin
          wo  <= c.w - 16'(c.r) + 1'b1;
          ho  <= c.h - 16'(c.s) + 1'b1;
          nct <= 16'((32'(c.c) + C_T - 1) / C_T);
          ncg <= 16'((32'(c.w) - 32'(c.r) + 1 + V - 1) / V);
          nfg <= 16'((32'(c.k) + G - 1) / G);
          rec_per_fg <= ((32'(c.c) + C_T - 1) / C_T) * REC_WORDS;
          kc     <= '0;
          kc_rem <= WT_WORDS - L2_U_SLOT;
          if (c.r == 0 || c.s == 0 || 32'(c.r) > R_T || 32'(c.s) > S_T ||
              c.w < 16'(c.r) || c.h < 16'(c.s) || 32'(c.h) - 32'(c.s) + 1 > HMAX ||
              32'(c.u) > U || c.u == 0 || c.k == 0 || c.c == 0)
            state <= S_ERR;
          else
            state <= S_KC;
        end
        S_KC: begin
          // K_c (in filter groups) = how many groups' records fit in L2
          if (kc_rem >= rec_per_fg) begin
            kc_rem <= kc_rem - rec_per_fg;
            kc     <= kc + 1'b1;
          end else if (kc == 0) begin
            state <= S_ERR;
          end else begin
            widx  <= '0;
            state <= S_WFETCH;
          end
        end
        // ---- unique weights: DRAM -> L2 ----
        S_WFETCH: begin
          if (widx == 16'(c.u)) begin
            widx  <= '0;
            state <= S_WBCAST;
          end else if (!dram_req_valid && !dram_out && !dram_rsp_valid) begin
            dram_req_valid <= 1'b1;
            dram_req_addr  <= c.dram_base + 32'(widx);
          end
          if (dram_rsp_valid) begin
            wt_wr_en   <= 1'b1;
            wt_wr_addr <= WA_W'(widx);
            wt_wr_data <= dram_rsp_data;
            widx       <= widx + 1'b1;
          end
        end
        // ---- unique weights: L2 -> every PE's weight buffer ----
        S_WBCAST: begin
          if (widx == 16'(c.u)) begin
            fg0   <= '0;
            state <= S_WBCAST_END;
          end else begin
            wt_rd_en   <= 1'b1;
            wt_rd_addr <= WA_W'(widx);
            q_valid    <= 1'b1;
            q_bus_in   <= 1'b0;
            q_word     <= '{valid: 1'b1, sel: L1_WBUF, addr: widx, data: '0};
            q_dest     <= '1;
            widx       <= widx + 1'b1;
          end
        end
        S_WBCAST_END: begin
          // let the last weight words pass the pipeline
          settle <= settle + 1'b1;
          if (settle == 3'd4) begin
            settle <= '0;
            state  <= S_CHUNK;
          end
        end
        // ---- (A) next K_c chunk of filter groups: DRAM -> L2 ----
        S_CHUNK: begin
          if (fg0 >= nfg) begin
            state <= S_DONE;
          end else begin
            nfg_chunk <= (nfg - fg0 < kc) ? nfg - fg0 : kc;
            f_l <= '0; t_l <= '0;
            widx <= '0;
            n_chunks <= n_chunks + 1;
            state <= S_FETCH_HDR;
          end
        end
        S_FETCH_HDR, S_FETCH_WORDS: begin
          if (state == S_FETCH_WORDS && widx == rec_n + 1'b1) begin
            // record complete
            widx <= '0;
            state <= S_FETCH_HDR;
            if (t_l + 1'b1 == nct) begin
              t_l <= '0;
              if (f_l + 1'b1 == nfg_chunk) begin
                job_cg <= '0; job_fg <= '0;
                state  <= S_ASSIGN;
                pidx   <= '0;
                pe_act <= '0;
              end else f_l <= f_l + 1'b1;
            end else t_l <= t_l + 1'b1;
          end else begin
            if (!dram_req_valid && !dram_out && !dram_rsp_valid) begin
              dram_req_valid <= 1'b1;
              dram_req_addr  <= rec_dram + 32'(widx);
            end
            if (dram_rsp_valid) begin
              wt_wr_en   <= 1'b1;
              wt_wr_addr <= WA_W'(rec_l2 + 32'(widx));
              wt_wr_data <= dram_rsp_data;
              widx       <= widx + 1'b1;
              if (state == S_FETCH_HDR) begin
                rec_n <= dram_rsp_data;
                if (32'(dram_rsp_data) > IIT_DEPTH) state <= S_ERR;
                else state <= S_FETCH_WORDS;
              end
            end
          end
        end
        // ---- (B) assign up to P jobs to the PEs ----
        S_ASSIGN: begin
          if (32'(pidx) == P || job_fg == nfg_chunk) begin
            ct    <= '0;
            pidx  <= '0;
            n_rounds <= n_rounds + 1;
            state <= S_TILE;
          end else begin
            pe_act[PI_W'(pidx)] <= 1'b1;
            pe_cg[PI_W'(pidx)]  <= job_cg;
            pe_fg[PI_W'(pidx)]  <= job_fg;
            if (job_cg + 1'b1 == ncg) begin
              job_cg <= '0;
              job_fg <= job_fg + 1'b1;
            end else job_cg <= job_cg + 1'b1;
            pidx <= pidx + 1'b1;
          end
        end
        // ---- (C) per channel tile: tables to the PEs ----
        S_TILE: begin
          if (ct == nct) begin
            pidx <= '0;
            wb_h <= '0; wb_v <= '0; wb_g <= '0;
            state <= S_WB;
          end else begin
            pidx  <= '0;
            state <= S_TBL_PE;
          end
        end
        S_TBL_PE: begin
          if (32'(pidx) == P) begin
            hrow  <= '0;
            state <= S_ROW;
          end else if (pe_act[PI_W'(pidx)] && first_fg) begin
            state <= S_TBL_HDR;
          end else begin
            pidx <= pidx + 1'b1;
          end
        end
        S_TBL_HDR: begin
          wt_rd_en   <= 1'b1;
          wt_rd_addr <= WA_W'(L2_U_SLOT + (32'(pe_fg[PI_W'(pidx)]) * 32'(nct) + 32'(ct)) * REC_WORDS);
          state      <= S_TBL_HDR_WAIT;
        end
        S_TBL_HDR_WAIT: begin
          if (!wt_rd_en) begin
            rec_n <= wt_rd_data;
            widx  <= '0;
            state <= S_TBL_STREAM;
          end
        end
        S_TBL_STREAM: begin
          if (widx == rec_n) begin
            pidx  <= pidx + 1'b1;
            state <= S_TBL_PE;
          end else begin
            wt_rd_en   <= 1'b1;
            wt_rd_addr <= WA_W'(L2_U_SLOT + (32'(pe_fg[PI_W'(pidx)]) * 32'(nct) + 32'(ct)) * REC_WORDS
                                + 32'(widx) + 1);
            q_valid  <= 1'b1;
            q_bus_in <= 1'b0;
            q_word   <= '{valid: 1'b1, sel: L1_TABLE, addr: widx, data: '0};
            q_dest   <= same_fg;
            widx     <= widx + 1'b1;
          end
        end
        // ---- (D) per output row: input window to the PEs ----
        S_ROW: begin
          if (hrow == ho) begin
            ct    <= ct + 1'b1;
            state <= S_TILE;
          end else begin
            pidx  <= '0;
            yi    <= '0; col <= '0; ch <= '0;
            state <= S_INP_PE;
            if (hrow != 0) n_slide_rows <= n_slide_rows + 1;
          end
        end
        S_INP_PE: begin
          if (32'(pidx) == P && settle != 3'd5) begin
            // wait until the last words have reached the PEs' L1
            settle <= settle + 1'b1;
          end else if (32'(pidx) == P) begin
            settle    <= '0;
            done_seen <= ~pe_act;
            pe_start  <= pe_act;
            pe_start_h     <= HA_W'(hrow);
            pe_start_first <= (ct == 0);
            n_row_runs <= n_row_runs + 1;
            state <= S_WAIT;
          end else if (pe_act[PI_W'(pidx)] && first_cg) begin
            yi <= '0; col <= '0; ch <= '0;
            state <= S_INP_STREAM;
          end else begin
            pidx <= pidx + 1'b1;
          end
        end
        S_INP_STREAM: begin
          act_rd_en   <= !in_pad;
          act_rd_addr <= AA_W'((32'(in_c) * 32'(c.h) + 32'(in_y)) * 32'(c.w) + 32'(in_x));
          q_valid  <= 1'b1;
          q_pad    <= in_pad;
          q_bus_in <= 1'b1;
          q_word   <= '{valid: 1'b1, sel: L1_INBUF,
                        addr: 16'({col, S_W'(32'(in_y) % S_T), ch}), data: '0};
          q_dest   <= same_cg;
          if (in_pad) n_pad_words <= n_pad_words + 1;
          if (32'(ch) == C_T - 1) begin
            ch <= '0;
            if (32'(col) == NCOL - 1) begin
              col <= '0;
              if (hrow != 0 || 16'(yi) + 1'b1 == 16'(c.s)) begin
                pidx  <= pidx + 1'b1;
                state <= S_INP_PE;
              end else yi <= yi + 1'b1;
            end else col <= col + 1'b1;
          end else ch <= ch + 1'b1;
        end
        // ---- (E) all PEs of the round compute the row ----
        S_WAIT: begin
          if (&(done_seen | pe_done)) begin
            hrow  <= hrow + 1'b1;
            state <= S_ROW;
          end
          done_seen <= done_seen | pe_done;
        end
        // ---- (F) outputs to the other L2 half ----
        S_WB: begin
          if (32'(pidx) == P) begin
            state <= S_NEXT_ROUND;
          end else if (!pe_act[PI_W'(pidx)]) begin
            pidx <= pidx + 1'b1;
          end else begin
            state <= S_WB_WRITE;
          end
        end
        S_WB_WRITE: begin
          act_wr_en   <= wb_ok;
          act_wr_addr <= AA_W'((32'(wb_k) * 32'(ho) + 32'(wb_h)) * 32'(wo) + 32'(wb_x));
          act_wr_data <= pe_rd_act[PI_W'(pidx)];
          if (32'(wb_g) == G - 1) begin
            wb_g <= '0;
            if (32'(wb_v) == V - 1) begin
              wb_v <= '0;
              if (16'(wb_h) + 1'b1 == ho) begin
                wb_h <= '0;
                pidx <= pidx + 1'b1;
                state <= S_WB;
              end else wb_h <= wb_h + 1'b1;
            end else wb_v <= wb_v + 1'b1;
          end else wb_g <= wb_g + 1'b1;
        end
        S_NEXT_ROUND: begin
          pidx   <= '0;
          pe_act <= '0;
          if (job_fg == nfg_chunk) begin
            fg0   <= fg0 + nfg_chunk;
            state <= S_CHUNK;
          end else begin
            state <= S_ASSIGN;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_ERR: begin
          error <= 1'b1;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
