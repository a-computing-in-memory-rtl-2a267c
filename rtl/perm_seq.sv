// perm_seq -- permutation (circular right shift) sequencer of the IM-ODHD
// mat.
//
// A D-bit hypervector is stored in row i of L consecutive PEs (PE base holds
// the most significant N bits). Rotating it right by m bits (0 <= m < N) means
// that every PE keeps its own bits shifted right by m and receives the m low
// bits of the PE before it (cyclically) as its new top bits. Since those
// bits must cross PEs, they travel through the mat-level registers A and B.
//
// The PEs of the group are alternately destination and source; round 1 has
// the even PEs (offset 0, 2, ...) as destinations, round 2 swaps the roles.
// One round:
//   SHIFT0  all PEs at once: sources AND row i with the low-m mask and start
//           shifting left, destinations AND row i with the high mask and
//           start shifting right; both write to spare row 1.
//   SHIFT   further 3-bit steps (the shifter moves 0..3 bits per pass), each
//           re-reading and rewriting spare row 1, until sources have moved
//           N-m bits left and destinations m bits right.
//   UP      two sources put spare row 1 on buses A and B into registers A/B.
//   DOWN    the registers are written into spare row 2 of the destinations
//           that follow those sources; UP/DOWN repeat for all sources.
//   OR      destinations OR spare rows 1 and 2 into spare row 3 (row j).
// After round 2 every PE holds its permuted slice in row j; with copy_out
// set, one more cycle copies row j into row_out of every PE. Row i is never
// changed. `done` pulses for one cycle at the end; `busy` is high from the
// cycle after `start` until then.
//
// Cycles from start to done: 2 * (S + 2*ceil(L/4) + 1) + copy_out + 1 with
// S = max(ceil((N-m)/3), ceil(m/3), 1).
//
// The two rounds, the masks, the spare rows, the use of both registers and
// the multi-step shifts follow the paper's description and its example
// figure. Which PEs are destinations first, the source-to-destination
// direction (taken from the example), the use of spare row 1 as scratch for
// the long left shift, the even-L restriction and the optional final copy
// are this design's own reading.
module perm_seq
  import imodhd_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned Q = 16,
  parameter int unsigned N = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(P)+$clog2(Q)-1:0] cfg_base,   // first PE of the group
  input  logic [$clog2(P)+$clog2(Q):0]   cfg_len,    // L, even, >= 2
  input  logic [$clog2(N)-1:0]           cfg_shift,  // m
  input  perm_rows_t                     cfg_rows,
  output logic                           busy,
  output logic                           done,
  output pe_cmd_t                        cmd0,
  output pe_cmd_t                        cmd1,
  output pe_role_e                       role       [P*Q],
  output shift_mask_t                    shift_mask [P*Q],
  output logic [$clog2(P)+$clog2(Q)-1:0] addr_a,
  output bus_op_e                        bus_op_a,
  output logic [$clog2(P)+$clog2(Q)-1:0] addr_b,
  output bus_op_e                        bus_op_b
);

  localparam int unsigned NPE = P * Q;
  localparam int unsigned AW  = $clog2(P) + $clog2(Q);
  localparam int unsigned CW  = $clog2(N) + 1;   // holds 0..N

  typedef enum logic [2:0] {
    S_IDLE, S_SHIFT0, S_SHIFT, S_UP, S_DOWN, S_OR, S_COPY, S_DONE
  } state_e;

  state_e          state;
  logic            round;      // 0: even offsets are destinations
  logic [CW-1:0]   src_rem, dst_rem;
  logic [AW:0]     k;          // ordinal of the next source to move
  logic [AW-1:0]   base;
  logic [AW:0]     len;
  logic [CW-1:0]   shift_m;
  perm_rows_t      rows;

  logic [1:0]      amt_src, amt_dst;
  logic [AW:0]     half;
  logic            pair_b;
  logic [AW:0]     src_off_a, src_off_b, dst_off_a, dst_off_b;

  function automatic logic [1:0] step(logic [CW-1:0] rem);
    return (rem >= CW'(3)) ? 2'd3 : rem[1:0];
  endfunction

  function automatic logic [AW:0] wrap(logic [AW:0] off, logic [AW:0] l);
    return (off >= l) ? off - l : off;
  endfunction

  assign amt_src   = step(src_rem);
  assign amt_dst   = step(dst_rem);
  assign half      = len >> 1;
  assign pair_b    = (k + 1) < half;
  assign src_off_a = (k << 1) + (AW+1)'(!round);
  assign src_off_b = src_off_a + (AW+1)'(2);
  assign dst_off_a = wrap(src_off_a + (AW+1)'(1), len);
  assign dst_off_b = wrap(src_off_b + (AW+1)'(1), len);

  assign busy = (state != S_IDLE);

  // Membership of each PE in the group and the parity of its offset.
  logic [NPE-1:0] in_grp, odd_off;
  always_comb begin
    for (int unsigned i = 0; i < NPE; i++) begin
      in_grp[i]  = ((AW+1)'(i) >= (AW+1)'(base)) && ((AW+1)'(i) - (AW+1)'(base) < len);
      odd_off[i] = ((AW+1)'(i) - (AW+1)'(base)) % 2 != 0;
    end
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      round   <= 1'b0;
      src_rem <= '0;
      dst_rem <= '0;
      k       <= '0;
      base    <= '0;
      len     <= '0;
      shift_m <= '0;
      rows    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          base    <= cfg_base;
          len     <= cfg_len;
          shift_m <= CW'(cfg_shift);
          rows    <= cfg_rows;
          round   <= 1'b0;
          src_rem <= CW'(N) - CW'(cfg_shift);
          dst_rem <= CW'(cfg_shift);
          state   <= S_SHIFT0;
        end
        S_SHIFT0, S_SHIFT: begin
          src_rem <= src_rem - CW'(amt_src);
          dst_rem <= dst_rem - CW'(amt_dst);
          if (src_rem - CW'(amt_src) == '0 && dst_rem - CW'(amt_dst) == '0) begin
            k     <= '0;
            state <= S_UP;
          end else begin
            state <= S_SHIFT;
          end
        end
        S_UP:   state <= S_DOWN;
        S_DOWN: begin
          k     <= k + 2;
          state <= (k + 2 >= half) ? S_OR : S_UP;
        end
        S_OR: begin
          if (!round) begin
            round   <= 1'b1;
            src_rem <= CW'(N) - shift_m;
            dst_rem <= shift_m;
            state   <= S_SHIFT0;
          end else begin
            state <= rows.copy_out ? S_COPY : S_DONE;
          end
        end
        S_COPY: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // -------------------------------------------------------------- outputs
  always_comb begin
    cmd0     = '0;
    cmd1     = '0;
    addr_a   = '0;
    addr_b   = '0;
    bus_op_a = BUS_IDLE;
    bus_op_b = BUS_IDLE;
    for (int unsigned i = 0; i < NPE; i++) begin
      role[i]       = ROLE_IDLE;
      shift_mask[i] = '0;
    end

    unique case (state)
      S_SHIFT0, S_SHIFT: begin
        if (state == S_SHIFT0) begin
          cmd0 = '{op: CSA_AND, cin: 1'b0, wr: WR_COPY, row_x: rows.row_i,
                   row_y: rows.row_mask_lo, row_w: rows.row_sp1};
          cmd1 = '{op: CSA_AND, cin: 1'b0, wr: WR_COPY, row_x: rows.row_i,
                   row_y: rows.row_mask_hi, row_w: rows.row_sp1};
        end else begin
          cmd0 = '{op: CSA_READ, cin: 1'b0, wr: WR_COPY, row_x: rows.row_sp1,
                   row_y: rows.row_sp1, row_w: rows.row_sp1};
          cmd1 = cmd0;
        end
        for (int unsigned i = 0; i < NPE; i++) begin
          if (in_grp[i]) begin
            if (odd_off[i] == round) begin
              // destination: own bits move right by m
              if (state == S_SHIFT0 || dst_rem != '0) begin
                role[i]       = ROLE_CMD1;
                shift_mask[i] = '{left: 1'b0, amt: amt_dst};
              end
            end else begin
              // source: low m bits move left by N-m
              if (state == S_SHIFT0 || src_rem != '0) begin
                role[i]       = ROLE_CMD0;
                shift_mask[i] = '{left: 1'b1, amt: amt_src};
              end
            end
          end
        end
      end

      S_UP: begin
        cmd0     = '{op: CSA_READ, cin: 1'b0, wr: WR_NONE, row_x: rows.row_sp1,
                     row_y: rows.row_sp1, row_w: rows.row_sp1};
        addr_a   = base + AW'(src_off_a);
        bus_op_a = BUS_PE_TO_REG;
        role[addr_a] = ROLE_CMD0;
        if (pair_b) begin
          addr_b   = base + AW'(src_off_b);
          bus_op_b = BUS_PE_TO_REG;
          role[addr_b] = ROLE_CMD0;
        end
      end

      S_DOWN: begin
        cmd0     = '{op: CSA_READ, cin: 1'b0, wr: WR_DATA, row_x: rows.row_sp2,
                     row_y: rows.row_sp2, row_w: rows.row_sp2};
        addr_a   = base + AW'(dst_off_a);
        bus_op_a = BUS_REG_TO_PE;
        role[addr_a] = ROLE_CMD0;
        if (pair_b) begin
          addr_b   = base + AW'(dst_off_b);
          bus_op_b = BUS_REG_TO_PE;
          role[addr_b] = ROLE_CMD0;
        end
      end

      S_OR, S_COPY: begin
        if (state == S_OR)
          cmd1 = '{op: CSA_OR, cin: 1'b0, wr: WR_COPY, row_x: rows.row_sp1,
                   row_y: rows.row_sp2, row_w: rows.row_sp3};
        else
          cmd1 = '{op: CSA_READ, cin: 1'b0, wr: WR_COPY, row_x: rows.row_sp3,
                   row_y: rows.row_sp3, row_w: rows.row_out};
        for (int unsigned i = 0; i < NPE; i++)
          if (in_grp[i] && (state == S_COPY || odd_off[i] == round)) role[i] = ROLE_CMD1;
      end

      default: ;
    endcase
  end

  // The group must fit the mat and hold an even number of PEs.
  always_ff @(posedge clk)
    if (rst_n && state == S_IDLE && start)
      assert (cfg_len >= 2 && !cfg_len[0] && (AW+2)'(cfg_base) + (AW+2)'(cfg_len) <= (AW+2)'(NPE))
        else $error("perm_seq: bad group (base %0d, length %0d)", cfg_base, cfg_len);

endmodule
