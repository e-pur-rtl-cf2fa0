// epur_ctrl: layer sequencer. For one pass over a layer (forward or, with
// cfg.reverse, backward in time) it issues the dot products of all four CUs
// in lock-step, in the order of Maximizing Weight Locality (MWL):
//   Step 1, forward connections: for each neuron k it requests the row
//     W_x[k] of every gate from main memory (wrow_req / wrow_valid, kx beats
//     of N words per gate, written into the row buffers), then issues
//     W_x[k].x_t for every element of the sequence, x_t broadcast from the
//     OM. The MUs quantise and store the results.
//   Step 2, recurrent connections: for each step s it issues W_h[k].h_{t-1}
//     for every neuron, reading h_{t-1} from the input buffers; before step
//     s > 0 it waits until all H values of h_{t-1} have been written back.
// Between the steps it waits until every CU is idle so that every partial
// is in the OM. A dot product only starts when all CUs report room in their
// MU FIFO (a stall otherwise); the events output flags each cycle spent
// waiting: bit 0 for MU room, bit 1 for the weight row, bit 2 for the
// recurrent dependency.
// Timing: one sub-vector per cycle when nothing stalls; step 1 takes about
// H*(kx + T*kx) cycles and step 2 about T*H*kh cycles plus dependency waits.
// The evaluation order follows the reference design; the handshakes and the
// stall rules are this design's.
module epur_ctrl
  import epur_pkg::*;
#(
  parameter int WB_RA_W  = 15,
  parameter int RB_RA_W  = 6,
  parameter int IB_RA_W  = 6,
  parameter int OM_RA_W  = 17,
  parameter int OM_REGION_ROWS = 32768
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               busy,
  output logic               done,
  input  logic [NGATES-1:0]  cu_ready,
  input  logic [NGATES-1:0]  cu_busy,
  input  logic               h_written,   // one h_t value reached the input buffers
  // forward weight row stream
  output logic               wrow_req,
  output logic [10:0]        wrow_k,
  input  logic               wrow_valid,
  output logic               rb_we,
  output logic [RB_RA_W-1:0] rb_waddr,
  // issue bus
  output logic               iss_valid,
  output logic               iss_first,
  output logic               iss_last,
  output dtag_t              iss_tag,
  output logic [WB_RA_W-1:0] iss_wrow,
  output logic [IB_RA_W-1:0] iss_hrow,
  output logic               iss_hbank,
  output logic               om_rd_en,
  output logic [OM_RA_W-1:0] om_rd_row,
  output logic [2:0]         events
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_FWD, C_DRAIN, C_RWAIT, C_REC, C_FINAL} cst_e;
  cst_e        st;
  logic [10:0] k;
  logic [19:0] s;
  logic [6:0]  j;
  logic [10:0] hcnt;
  logic [19:0] t;
  logic        all_ready, go;
  logic [6:0]  kn;   // sub-vectors per neuron in the current step

  assign all_ready = &cu_ready;
  assign t         = cfg.reverse ? (cfg.seq_len - 20'd1 - s) : s;
  assign kn        = (st == C_FWD) ? cfg.kx : cfg.kh;
  assign go        = ((st == C_FWD) || (st == C_REC)) && ((j != 0) || all_ready);
  assign busy      = (st != C_IDLE);

  assign wrow_req  = (st == C_LOAD);
  assign wrow_k    = k;
  assign rb_we     = (st == C_LOAD) && wrow_valid;
  assign rb_waddr  = RB_RA_W'(j);

  assign iss_valid = go;
  assign iss_first = (j == 0);
  assign iss_last  = (j == kn - 7'd1);
  assign iss_tag   = '{phase: (st == C_REC), first_step: (s == 0), k: k, s: s, t: t};
  assign iss_wrow  = (st == C_REC) ? WB_RA_W'(32'(k) * 32'(cfg.kh) + 32'(j)) : WB_RA_W'(j);
  assign iss_hrow  = IB_RA_W'(j);
  assign iss_hbank = ~s[0];
  assign om_rd_en  = go && (st == C_FWD);
  assign om_rd_row = OM_RA_W'(32'(cfg.src_half) * OM_REGION_ROWS + 32'(t) * 32'(cfg.kx) + 32'(j));

  assign events[0] = ((st == C_FWD) || (st == C_REC)) && (j == 0) && !all_ready;
  assign events[1] = (st == C_LOAD) && !wrow_valid;
  assign events[2] = (st == C_RWAIT) && (hcnt != cfg.n_hid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; k <= '0; s <= '0; j <= '0; hcnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (h_written) hcnt <= hcnt + 11'd1;
      unique case (st)
        C_IDLE: if (start) begin
          st <= C_LOAD; k <= '0; s <= '0; j <= '0;
        end
        C_LOAD: if (wrow_valid) begin
          if (j == cfg.kx - 7'd1) begin
            j  <= '0;
            s  <= '0;
            st <= C_FWD;
          end else j <= j + 7'd1;
        end
        C_FWD: if (go) begin
          if (j == kn - 7'd1) begin
            j <= '0;
            if (s == cfg.seq_len - 20'd1) begin
              s <= '0;
              if (k == cfg.n_hid - 11'd1) begin
                k  <= '0;
                st <= C_DRAIN;
              end else begin
                k  <= k + 11'd1;
                st <= C_LOAD;
              end
            end else s <= s + 20'd1;
          end else j <= j + 7'd1;
        end
        C_DRAIN: if (cu_busy == '0) begin
          st   <= C_REC;
          hcnt <= '0;
        end
        C_RWAIT: if (hcnt == cfg.n_hid) begin
          hcnt <= '0;
          st   <= C_REC;
        end
        C_REC: if (go) begin
          if (j == kn - 7'd1) begin
            j <= '0;
            if (k == cfg.n_hid - 11'd1) begin
              k <= '0;
              if (s == cfg.seq_len - 20'd1) st <= C_FINAL;
              else begin
                s  <= s + 20'd1;
                st <= C_RWAIT;
              end
            end else k <= k + 11'd1;
          end else j <= j + 7'd1;
        end
        C_FINAL: if (hcnt == cfg.n_hid && cu_busy == '0) begin
          st   <= C_IDLE;
          done <= 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    assert (!rst_n || !(start && busy)) else $error("epur_ctrl: start while busy");
    assert (!rst_n || !(h_written && st != C_REC && st != C_RWAIT && st != C_FINAL))
      else $error("epur_ctrl: h_t written outside step 2");
  end
endmodule
