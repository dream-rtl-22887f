// migration_controller: services requests while rows migrate on demand from
// their predefined (PAMS) location to their estimated (EAMS) location, and
// returns them on rollback.
//
// Bookkeeping, one bit per DRAM location L in each of two tables:
//   MT[L] = 1  the frame originally stored at L, P^-1(L), now lives at its
//              EAMS location E(P^-1(L)).
//   ST[L] = 1  the content of L was pushed out by a swap; it now sits at
//              P(E^-1(L)), the PAMS location of the frame that moved into L.
// A request for frame f is looked up at L0 = P(f):
//   MT[L0] = 1             -> served at E(f)
//   MT[L0] = 0, ST[L0] = 0 -> served at L0
//   ST[L0] = 1             -> follow X <- P(E^-1(X)) from L0 until ST[X] = 0,
//                             served at that X (reverse address mapping)
// After the request has been handed to the DRAM scheduler, and only while
// the estimated mapping is on, the row is migrated to D = E(f) if
//   - it still sits at L0 (MT[L0] = ST[L0] = 0) and D != L0,
//   - D still holds its own original row (MT[D] = ST[D] = 0),
//   - D is in another bank than L0 (same-bank moves do not reduce conflicts).
// The migration is always a swap (the destination is taken to be occupied):
// f goes to D, D's row goes to L0, then MT[L0] and ST[D] are set. Because a
// migration only ever pairs two untouched locations, the pairs are disjoint
// and a rollback can undo them in any order.
//
// Rollback (rollback_req): requests are held off while every location L is
// scanned; where MT[L] = 1 the pair (L, E(P^-1(L))) is swapped back and both
// bits are cleared. rollback_done is high for one cycle per finished sweep
// (held until rollback_req falls).
//
// Interfaces: req_* and svc_* are valid/ready handshakes; one request is in
// flight at a time. mig_* drives migration_sequencer. ev_* are one-cycle
// event pulses for statistics. mig_swap is always 1 because every
// migration here is a swap; the port stays so that the sequencer's one-way
// move remains reachable. Table reads take one cycle; a request costs
// 3 cycles plus one per swap-chain hop plus the service handshake, and 3 more
// plus the relocation when it migrates.
//
// The table semantics, on-demand migration, swap instead of chained moves,
// the reverse-mapping search, the inter-bank-only rule and the rollback
// follow the paper. Not migrating a row that was already swapped out (the
// paper does migrate it), rolling back by a stalling sweep, and serving
// before migrating one request at a time are this design's choices.
module migration_controller #(
  parameter int unsigned BANK_W  = dream_pkg::BANK_W,
  parameter int unsigned ROW_W   = dream_pkg::ROW_W,
  parameter int unsigned COL_W   = dream_pkg::COL_W,
  parameter bit          PERMUTE = 1'b1,
  parameter int unsigned FRAME_W = BANK_W + ROW_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // mapping control
  input  logic [FRAME_W-1:0] base_mask,
  input  logic [FRAME_W-1:0] act_mask,
  input  logic               eams_on,
  input  logic               rollback_req,
  output logic               rollback_done,
  output logic               init_busy,
  // requests (row frame + column)
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [FRAME_W-1:0] req_frame,
  input  logic [COL_W-1:0]   req_col,
  input  logic               req_we,
  // translated request to the DRAM scheduler
  output logic               svc_valid,
  input  logic               svc_ready,
  output logic [BANK_W-1:0]  svc_bank,
  output logic [ROW_W-1:0]   svc_row,
  output logic [COL_W-1:0]   svc_col,
  output logic               svc_we,
  // relocation command to the migration sequencer
  output logic               mig_valid,
  input  logic               mig_ready,
  output logic [FRAME_W-1:0] mig_src,
  output logic [FRAME_W-1:0] mig_dst,
  output logic               mig_swap,
  input  logic               mig_done,
  // statistics
  output logic               ev_migrate,
  output logic               ev_skip_intra,
  output logic               ev_skip_taken,
  output logic               ev_chain,
  output logic               ev_rb_swap
);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOK0, S_LOOK1, S_CHAIN_RD, S_CHAIN_CHK, S_SVC,
    S_DST0, S_DST1, S_MIG, S_MIGW, S_UPD,
    S_RB_RD, S_RB_CHK, S_RB_MIG, S_RB_END
  } st_t;

  st_t               st;
  logic              rb_phase;   // relocation belongs to the rollback sweep
  logic [FRAME_W-1:0] f_r, loc_r, x_r, rb_l;
  logic [COL_W-1:0]  col_r;
  logic              we_r, mt0_r, st0_r;

  // mappers
  logic [FRAME_W-1:0] l0, e_in, e_out, step_in, step_mid, step_out, rb_f;

  addr_mapper #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PERMUTE(PERMUTE), .INVERSE(1'b0))
    u_pams   (.mask(base_mask), .din(f_r),      .dout(l0));
  addr_mapper #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PERMUTE(PERMUTE), .INVERSE(1'b0))
    u_eams   (.mask(act_mask),  .din(e_in),     .dout(e_out));
  addr_mapper #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PERMUTE(PERMUTE), .INVERSE(1'b1))
    u_step_i (.mask(act_mask),  .din(step_in),  .dout(step_mid));
  addr_mapper #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PERMUTE(PERMUTE), .INVERSE(1'b0))
    u_step_f (.mask(base_mask), .din(step_mid), .dout(step_out));
  addr_mapper #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PERMUTE(PERMUTE), .INVERSE(1'b1))
    u_rb_i   (.mask(base_mask), .din(rb_l),     .dout(rb_f));

  assign e_in    = rb_phase ? rb_f : f_r;
  assign step_in = (st == S_LOOK1) ? l0 : x_r;

  // tables
  logic [FRAME_W-1:0] mt_addr, st_addr;
  logic mt_we, st_we, mt_wd, st_wd, mt_rd, st_rd, mt_busy, st_busy;

  status_table #(.AW(FRAME_W)) u_mt (.clk, .rst_n, .addr(mt_addr), .we(mt_we), .wdata(mt_wd), .rdata(mt_rd), .busy(mt_busy));
  status_table #(.AW(FRAME_W)) u_st (.clk, .rst_n, .addr(st_addr), .we(st_we), .wdata(st_wd), .rdata(st_rd), .busy(st_busy));

  assign init_busy = (st == S_INIT);

  always_comb begin
    mt_addr = l0;
    st_addr = l0;
    mt_we   = 1'b0;
    st_we   = 1'b0;
    mt_wd   = 1'b0;
    st_wd   = 1'b0;
    unique case (st)
      S_CHAIN_RD: st_addr = x_r;
      S_DST0: begin
        mt_addr = e_out;
        st_addr = e_out;
      end
      S_UPD: begin
        if (rb_phase) begin
          mt_addr = rb_l;
          st_addr = e_out;
          mt_wd   = 1'b0;
          st_wd   = 1'b0;
        end else begin
          mt_addr = l0;
          st_addr = e_out;
          mt_wd   = 1'b1;
          st_wd   = 1'b1;
        end
        mt_we = 1'b1;
        st_we = 1'b1;
      end
      S_RB_RD: mt_addr = rb_l;
      default: ;
    endcase
  end

  // handshakes and outputs
  assign req_ready     = (st == S_IDLE) && !rollback_req;
  assign svc_valid     = (st == S_SVC);
  assign svc_bank      = loc_r[BANK_W-1:0];
  assign svc_row       = loc_r[FRAME_W-1:BANK_W];
  assign svc_col       = col_r;
  assign svc_we        = we_r;
  assign mig_valid     = (st == S_MIG) || (st == S_RB_MIG);
  assign mig_src       = rb_phase ? rb_l : l0;
  assign mig_dst       = e_out;
  assign mig_swap      = 1'b1;
  assign rollback_done = (st == S_RB_END);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st            <= S_INIT;
      rb_phase      <= 1'b0;
      f_r           <= '0;
      loc_r         <= '0;
      x_r           <= '0;
      rb_l          <= '0;
      col_r         <= '0;
      we_r          <= 1'b0;
      mt0_r         <= 1'b0;
      st0_r         <= 1'b0;
      ev_migrate    <= 1'b0;
      ev_skip_intra <= 1'b0;
      ev_skip_taken <= 1'b0;
      ev_chain      <= 1'b0;
      ev_rb_swap    <= 1'b0;
    end else begin
      ev_migrate    <= 1'b0;
      ev_skip_intra <= 1'b0;
      ev_skip_taken <= 1'b0;
      ev_chain      <= 1'b0;
      ev_rb_swap    <= 1'b0;
      unique case (st)
        S_INIT: if (!mt_busy && !st_busy) st <= S_IDLE;
        S_IDLE: begin
          if (rollback_req) begin
            rb_phase <= 1'b1;
            rb_l     <= '0;
            st       <= S_RB_RD;
          end else if (req_valid) begin
            f_r   <= req_frame;
            col_r <= req_col;
            we_r  <= req_we;
            st    <= S_LOOK0;
          end
        end
        S_LOOK0: st <= S_LOOK1;               // MT[L0], ST[L0] being read
        S_LOOK1: begin
          mt0_r <= mt_rd;
          st0_r <= st_rd;
          if (mt_rd) begin
            loc_r <= e_out;                   // migrated: EAMS location
            st    <= S_SVC;
          end else if (!st_rd) begin
            loc_r <= l0;                      // untouched: PAMS location
            st    <= S_SVC;
          end else begin
            x_r      <= step_out;             // swapped out: reverse mapping
            ev_chain <= 1'b1;
            st       <= S_CHAIN_RD;
          end
        end
        S_CHAIN_RD: st <= S_CHAIN_CHK;
        S_CHAIN_CHK: begin
          if (!st_rd) begin
            loc_r <= x_r;
            st    <= S_SVC;
          end else begin
            x_r <= step_out;
            st  <= S_CHAIN_RD;
          end
        end
        S_SVC: if (svc_ready) begin
          if (eams_on && !mt0_r && !st0_r && (e_out != l0)) st <= S_DST0;
          else                                              st <= S_IDLE;
        end
        S_DST0: st <= S_DST1;                 // MT[D], ST[D] being read
        S_DST1: begin
          if (mt_rd || st_rd) begin
            ev_skip_taken <= 1'b1;
            st            <= S_IDLE;
          end else if (e_out[BANK_W-1:0] == l0[BANK_W-1:0]) begin
            ev_skip_intra <= 1'b1;
            st            <= S_IDLE;
          end else begin
            st <= S_MIG;
          end
        end
        S_MIG: if (mig_ready) st <= S_MIGW;
        S_MIGW: if (mig_done) st <= S_UPD;
        S_UPD: begin
          if (rb_phase) begin
            ev_rb_swap <= 1'b1;
            if (rb_l == '1) st <= S_RB_END;
            else begin
              rb_l <= rb_l + 1'b1;
              st   <= S_RB_RD;
            end
          end else begin
            ev_migrate <= 1'b1;
            st         <= S_IDLE;
          end
        end
        S_RB_RD: st <= S_RB_CHK;
        S_RB_CHK: begin
          if (mt_rd) st <= S_RB_MIG;
          else if (rb_l == '1) st <= S_RB_END;
          else begin
            rb_l <= rb_l + 1'b1;
            st   <= S_RB_RD;
          end
        end
        S_RB_MIG: if (mig_ready) st <= S_MIGW;
        S_RB_END: if (!rollback_req) begin
          rb_phase <= 1'b0;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The service request must stay stable until it is taken.
  a_svc_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (svc_valid && !svc_ready) |=> (svc_valid && $stable({svc_bank, svc_row, svc_col})));

endmodule
