// ctrl_unit: control unit of the layered L-msRCQ decoder.
//
// Schedule: a ROM lists the E non-zero circulants in read order, layer by
// layer (block column, shift amount, position in layer, last-of-layer), built
// at elaboration from rcq_pkg::code_entry. The edge number (ROM address) is
// also the U_mn RAM address in every VN bank.
//
// Read side: in state RUN one circulant is issued per cycle (rd_*, all
// banks in lockstep) and its block column marked pending in a scoreboard.
// Layers overlap: reads of layer l+1 start right after the last read of
// layer l. Two rules stall the issue:
//   * RAW hazard: a circulant whose block column still awaits the writeback
//     of an earlier layer is not read until that write has landed;
//   * result spacing: the last circulant of a layer is held until the CN
//     result register has been released by the writeback of the previous
//     layer (at least d_l cycles after the previous layer's last read,
//     d_l being the previous layer's degree).
// Write side: when the CN pipeline reports layer_done, the writeback
// sequencer walks the same layer's ROM entries, one per cycle, giving the CN
// pipeline position and unshift amount (wb_*, starting in the cycle of
// layer_done), and the VN banks the column and edge one cycle later (vb_*). The scoreboard bit is cleared when the
// bank writes V_n.
// Parameters: the threshold memory is read with the (iteration, layer) of
// the read side, the reconstruction memory with that of the write side;
// both words are broadcast to all banks.
// Termination: after the last layer of an iteration has been issued the
// unit waits until all writebacks are done, then decides. The iteration
// passes the syndrome check if every CN parity of the hard decisions seen at
// read time was even (syn_fail never set) and no hard decision changed
// during the iteration (no flip), so all checks saw one vector. Decoding ends
// on a pass (EARLY_TERM = 1) or after IMAX iterations; done pulses with
// success and the iteration count.
//
// Follows the reference design for: state-machine control of reads, shifts
// and writeback, overlap of adjacent layers, read order arranged to avoid
// RAW hazards, (i,l)-indexed broadcast parameters, termination on syndrome
// or IMAX. Choices of this design: the scoreboard and spacing stalls (the
// reference relies on a hand-arranged order alone), draining at iteration
// ends, the syndrome check method, the host interface.
// Lint note: rst_n also appears in the assertions' disable condition, which
// a linter reports as a reset used both asynchronously and synchronously;
// the assertions are not logic and the flops use rst_n asynchronously only.
module ctrl_unit #(
  parameter int unsigned L          = 64,
  parameter int unsigned NB         = 256,
  parameter int unsigned MB         = 128,
  parameter int unsigned DI         = 4,
  parameter int unsigned IMAX       = 16,
  parameter int unsigned BC         = 4,
  parameter int unsigned BV         = 8,
  parameter bit          EARLY_TERM = 1'b1,
  parameter int unsigned W          = BV - 1,
  parameter int unsigned QW         = BC - 1,
  parameter int unsigned NTH        = (1 << QW) - 1,
  parameter int unsigned NRE        = 1 << QW,
  parameter int unsigned E          = rcq_pkg::num_edges(MB, DI),
  parameter int unsigned CW         = $clog2(NB),
  parameter int unsigned EW         = $clog2(E),
  parameter int unsigned SW         = $clog2(L),
  parameter int unsigned KW         = $clog2(rcq_pkg::max_deg(DI)),
  parameter int unsigned TW         = $clog2(IMAX * MB),
  parameter int unsigned IW         = $clog2(IMAX + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  success,
  output logic [IW-1:0]         iters,
  output logic [31:0]           stall_cycles,
  input  logic                  prm_we,
  input  logic                  prm_is_re,
  input  logic [TW-1:0]         prm_addr,
  input  logic [NRE-1:0][W-1:0] prm_data,
  // read side to the VN banks
  output logic                  rd_valid,
  output logic [CW-1:0]         rd_col,
  output logic [EW-1:0]         rd_edge,
  output logic                  rd_first,
  output logic [NTH-1:0][W-1:0] th,
  // CN pipeline input side (aligned with the banks' v_* outputs)
  output logic                  cn_valid,
  output logic                  cn_last,
  output logic [SW-1:0]         cn_shift,
  input  logic                  layer_done,
  input  logic                  syn_fail,
  // CN pipeline return side
  output logic                  wb_valid,
  output logic [KW-1:0]         wb_k,
  output logic [SW-1:0]         wb_shift,
  // return side to the VN banks (aligned with the CN pipeline's out_*)
  output logic                  vb_valid,
  output logic [CW-1:0]         vb_col,
  output logic [EW-1:0]         vb_edge,
  output logic [NRE-1:0][W-1:0] re,
  input  logic                  flip_any
);
  import rcq_pkg::*;

  typedef struct packed {
    logic [CW-1:0] col;
    logic [SW-1:0] shift;
    logic [KW-1:0] k;
    logic          last;
  } sched_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DECIDE} state_t;

  // ---------------------------------------------------------------- schedule ROM
  sched_t sched [E];

  initial begin
    int unsigned e, c, s, d;
    e = 0;
    for (int unsigned p = 0; p < MB; p++) begin
      d = layer_deg(p, MB, DI);
      for (int unsigned k = 0; k < d; k++) begin
        code_entry(p, k, MB, NB - MB, DI, L, c, s);
        sched[e] = '{col: CW'(c % NB), shift: SW'(s % L), k: KW'(k), last: (k == d - 1)};
        e++;
      end
    end
  end

  // ---------------------------------------------------------------- state
  state_t          state;
  logic [EW-1:0]   rd_ptr, wb_ptr;
  logic [$clog2(MB+1)-1:0] rd_layer, wb_layer;
  logic [IW-1:0]   iter;
  logic [NB-1:0]   pending;
  logic [KW+1:0]   gap;
  logic [EW:0]     outstanding;
  logic            syn_acc, flip_acc;
  logic            wb_active;
  logic [TW-1:0]   rd_tag, vb_tag;

  sched_t          cur, wcur;
  logic            can_issue, issue, clr;
  logic [CW-1:0]   clr_col;

  assign cur       = sched[rd_ptr];
  assign wcur      = sched[wb_ptr];
  assign can_issue = !pending[cur.col] && !(cur.last && gap > 1);
  assign issue     = (state == S_RUN) && can_issue;
  assign busy      = (state != S_IDLE);

  // read-side registered outputs
  logic [SW-1:0] rd_shift;
  logic          rd_last;
  logic [1:0]    cn_v_d, cn_l_d;
  logic [SW-1:0] cn_s_d [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rd_ptr       <= '0;
      rd_layer     <= '0;
      iter         <= '0;
      gap          <= '0;
      syn_acc      <= 1'b0;
      flip_acc     <= 1'b0;
      done         <= 1'b0;
      success      <= 1'b0;
      iters        <= '0;
      stall_cycles <= '0;
      rd_valid     <= 1'b0;
    end else begin
      done     <= 1'b0;
      rd_valid <= issue;
      if (gap != 0) gap <= gap - 1'b1;
      if (layer_done & syn_fail) syn_acc  <= 1'b1;
      if (flip_any)              flip_acc <= 1'b1;
      case (state)
        S_IDLE: if (start) begin
          state    <= S_RUN;
          rd_ptr   <= '0;
          rd_layer <= '0;
          iter     <= '0;
          syn_acc  <= 1'b0;
          flip_acc <= 1'b0;
          stall_cycles <= '0;
        end
        S_RUN: begin
          if (!can_issue) stall_cycles <= stall_cycles + 1;
          if (issue) begin
            rd_ptr <= (rd_ptr == EW'(E - 1)) ? '0 : rd_ptr + 1'b1;
            if (cur.last) begin
              gap <= (KW+2)'(cur.k) + 1'b1;
              if (rd_layer == ($bits(rd_layer))'(MB - 1)) begin
                rd_layer <= '0;
                state    <= S_DRAIN;
              end else begin
                rd_layer <= rd_layer + 1'b1;
              end
            end
          end
        end
        S_DRAIN: if (outstanding == 0) state <= S_DECIDE;
        S_DECIDE: begin
          if ((EARLY_TERM && !syn_acc && !flip_acc) || iter == IW'(IMAX - 1)) begin
            state   <= S_IDLE;
            done    <= 1'b1;
            success <= !syn_acc && !flip_acc;
            iters   <= iter + 1'b1;
          end else begin
            state    <= S_RUN;
            iter     <= iter + 1'b1;
            syn_acc  <= 1'b0;
            flip_acc <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    rd_col   <= cur.col;
    rd_edge  <= rd_ptr;
    rd_first <= (iter == 0);
    rd_shift <= cur.shift;
    rd_last  <= cur.last;
    rd_tag   <= TW'(iter * MB + rd_layer);
  end

  // delay the read-side controls by two cycles to meet the banks' outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cn_v_d <= '0;
      cn_l_d <= '0;
    end else begin
      cn_v_d <= {cn_v_d[0], rd_valid};
      cn_l_d <= {cn_l_d[0], rd_valid & rd_last};
    end
  end

  always_ff @(posedge clk) begin
    cn_s_d[0] <= rd_shift;
    cn_s_d[1] <= cn_s_d[0];
  end

  assign cn_valid = cn_v_d[1];
  assign cn_last  = cn_l_d[1];
  assign cn_shift = cn_s_d[1];

  // ---------------------------------------------------------------- writeback sequencer
  // The sequencer starts in the cycle layer_done pulses; the CN pipeline
  // reads its result register in the same cycles (wb_* are combinational
  // from the schedule ROM).
  logic [IW-1:0] wb_iter;
  logic          wb_go;
  logic          vb_v1;

  assign wb_go    = wb_active | layer_done;
  assign wb_valid = wb_go;
  assign wb_k     = wcur.k;
  assign wb_shift = wcur.shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_active <= 1'b0;
      wb_ptr    <= '0;
      wb_layer  <= '0;
      wb_iter   <= '0;
    end else begin
      if (state == S_IDLE && start) begin
        wb_ptr   <= '0;
        wb_layer <= '0;
        wb_iter  <= '0;
      end
      if (wb_go) begin
        wb_ptr <= (wb_ptr == EW'(E - 1)) ? '0 : wb_ptr + 1'b1;
        if (wcur.last) begin
          wb_active <= 1'b0;
          if (wb_layer == ($bits(wb_layer))'(MB - 1)) begin
            wb_layer <= '0;
            wb_iter  <= wb_iter + 1'b1;
          end else begin
            wb_layer <= wb_layer + 1'b1;
          end
        end else begin
          wb_active <= 1'b1;
        end
      end
    end
  end

  // bank side: one cycle after the CN return request
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vb_valid <= 1'b0;
      vb_v1    <= 1'b0;
    end else begin
      vb_valid <= wb_go;
      vb_v1    <= vb_valid;
    end
  end

  always_ff @(posedge clk) begin
    vb_col  <= wcur.col;
    vb_edge <= wb_ptr;
    vb_tag  <= TW'(wb_iter * MB + wb_layer);
    clr_col <= vb_col;
  end

  assign clr = vb_v1;   // the bank writes V_n in this cycle

  // ---------------------------------------------------------------- scoreboard
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending     <= '0;
      outstanding <= '0;
    end else begin
      if (clr)   pending[clr_col] <= 1'b0;
      if (issue) pending[cur.col] <= 1'b1;
      outstanding <= outstanding + (issue ? 1 : 0) - (clr ? 1 : 0);
    end
  end

  // ---------------------------------------------------------------- broadcast parameters
  rcq_param_rom #(.IMAX(IMAX), .MB(MB), .BC(BC), .BV(BV), .W(W), .KIND(1'b0)) u_th_rom (
    .clk, .wr_en(prm_we & !prm_is_re), .wr_addr(prm_addr), .wr_data(prm_data[NTH-1:0]),
    .raddr(rd_tag), .rdata(th));

  rcq_param_rom #(.IMAX(IMAX), .MB(MB), .BC(BC), .BV(BV), .W(W), .KIND(1'b1)) u_re_rom (
    .clk, .wr_en(prm_we & prm_is_re), .wr_addr(prm_addr), .wr_data(prm_data),
    .raddr(vb_tag), .rdata(re));

  // ---------------------------------------------------------------- rules
  // a finished layer must never arrive while the previous one is still being returned
  assert property (@(posedge clk) disable iff (!rst_n) layer_done |-> !wb_active);
  // a circulant is never read while its column awaits writeback
  assert property (@(posedge clk) disable iff (!rst_n) issue |-> !pending[cur.col]);
endmodule
