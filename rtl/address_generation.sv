// address_generation: walks the work buffer of the Ray Index Table and turns
// every entry into MVoxel Feature Table reads plus reducer control.
//
// Structured mode (voxel grids): ray samples 2q and 2q+1 are handled together
// by ports 0 and 1 (M = 2). For eight cycles the generator issues vertex
// v = 0..7 of each sample's entry: MFT row = VID - base, the vertex weight W,
// and first/last flags. Eight cycles per ray sample, two samples at a time,
// as in the paper.
// Unstructured mode (3D Gaussians): one cycle per point id; ports 0 and 1
// take PIDs 2k and 2k+1 of the PID list (twelve PIDs per RIT row), and the
// skip flag tells the reducers to pass the value through.
//
// The RIT is read one cycle ahead (its read row is the generator's next
// state), so consecutive samples follow without a bubble. A job takes one
// extra priming cycle. stall holds the issue (outputs invalid, state kept).
// The VID-minus-base address, the pairing of samples to ports and the
// priming cycle are this design's choices.
//
// Interface: pulse start with mode, count (ray samples or PIDs, >= 1) and
// base. busy stays high until the last issue; done pulses in that cycle.
module address_generation
  import potamoi_pkg::*;
#(
  parameter int unsigned M     = 2,
  parameter int unsigned NVERT = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  rep_e                                mode,
  input  logic [CNT_W-1:0]                    count,
  input  logic [VID_W-1:0]                    base,
  input  logic                                stall,
  output logic [M-1:0][RIT_ROW_AW-1:0]        rit_row,
  input  logic [M-1:0][RIT_ENTRY_W-1:0]       rit_data,
  output logic [M-1:0]                        iss_valid,
  output logic [M-1:0][MFT_AW-1:0]            iss_addr,
  output logic [M-1:0][FEAT_W-1:0]            iss_w,
  output logic [M-1:0]                        iss_first,
  output logic [M-1:0]                        iss_last,
  output logic [M-1:0]                        iss_skip,
  output logic [M-1:0][CNT_W-1:0]             iss_id,
  output logic                                busy,
  output logic                                done
);
  typedef enum logic [1:0] {S_IDLE, S_PRIME, S_RUN} state_e;

  state_e               state;
  rep_e                 mode_r;
  logic [CNT_W-1:0]     count_r;
  logic [VID_W-1:0]     base_r;
  logic [RIT_ROW_AW-1:0] q, q_next;    // pair index (structured) or RIT row (unstructured)
  logic [3:0]           v, v_next;     // vertex (structured) or PID pair in row (unstructured)
  logic [CNT_W-1:0]     eidx, eidx_next; // index of the element on port 0
  logic                 advance, last_step;

  localparam int unsigned PAIRS_PER_ROW = PID_PER_ENTRY / M;   // 6

  assign advance = (state == S_RUN) && !stall;

  always_comb begin
    if (mode_r == REP_STRUCTURED)
      last_step = (v == 4'(NVERT - 1)) && ((CNT_W+1)'(eidx) + (CNT_W+1)'(M) >= (CNT_W+1)'(count_r));
    else
      last_step = ((CNT_W+1)'(eidx) + (CNT_W+1)'(M) >= (CNT_W+1)'(count_r));
  end

  always_comb begin
    q_next    = q;
    v_next    = v;
    eidx_next = eidx;
    if (advance) begin
      if (mode_r == REP_STRUCTURED) begin
        if (v == 4'(NVERT - 1)) begin
          v_next    = '0;
          q_next    = q + 1'b1;
          eidx_next = eidx + CNT_W'(M);
        end else begin
          v_next = v + 1'b1;
        end
      end else begin
        eidx_next = eidx + CNT_W'(M);
        if (v == 4'(PAIRS_PER_ROW - 1)) begin
          v_next = '0;
          q_next = q + 1'b1;
        end else begin
          v_next = v + 1'b1;
        end
      end
    end
  end

  // RIT read address: one cycle ahead of use
  always_comb begin
    for (int m = 0; m < M; m++) begin
      logic [RIT_ROW_AW-1:0] qq;
      qq = (state == S_RUN) ? q_next : q;
      if (mode_r == REP_STRUCTURED) rit_row[m] = RIT_ROW_AW'(qq * M + m);
      else                          rit_row[m] = qq;
    end
  end

  // issue
  always_comb begin
    for (int m = 0; m < M; m++) begin
      logic [SLOT_W-1:0] slot;
      logic [VID_W-1:0]  id;
      slot = rit_data[m][v[2:0]*SLOT_W +: SLOT_W];
      id   = (mode_r == REP_STRUCTURED) ? slot[SLOT_W-1 -: VID_W]
                                        : rit_data[m][(v*M + m)*VID_W +: VID_W];
      iss_valid[m] = advance && ((CNT_W+1)'(eidx) + (CNT_W+1)'(m) < (CNT_W+1)'(count_r));
      iss_addr[m]  = MFT_AW'(id - base_r);
      iss_w[m]     = (mode_r == REP_STRUCTURED) ? slot[FEAT_W-1:0] : '0;
      iss_first[m] = (mode_r == REP_UNSTRUCTURED) || (v == 4'd0);
      iss_last[m]  = (mode_r == REP_UNSTRUCTURED) || (v == 4'(NVERT - 1));
      iss_skip[m]  = (mode_r == REP_UNSTRUCTURED);
      iss_id[m]    = eidx + CNT_W'(m);
    end
  end

  assign busy = (state != S_IDLE);
  assign done = advance && last_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      mode_r  <= REP_STRUCTURED;
      count_r <= '0;
      base_r  <= '0;
      q       <= '0;
      v       <= '0;
      eidx    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_PRIME;
          mode_r  <= mode;
          count_r <= count;
          base_r  <= base;
          q       <= '0;
          v       <= '0;
          eidx    <= '0;
        end
        S_PRIME: if (!stall) state <= S_RUN;
        default: begin
          q    <= q_next;
          v    <= v_next;
          eidx <= eidx_next;
          if (advance && last_step) state <= S_IDLE;
        end
      endcase
    end
  end
endmodule
