// mu: Multifunctional Unit of one Computation Unit. It takes each dot-product
// result of the DPU and runs the gate's program on it (epur_pkg::mu_prog):
//   MWL step 1 (phase 0): scale the forward-connection result by beta,
//     round it to 8 bits and store it in this gate's byte lane of the OM.
//   MWL step 2 (phase 1): add the dequantised step-1 partial, the peephole
//     product and the bias, apply sigmoid (input, forget, output gates) or
//     tanh (cell updater), and for the cell updater combine i_t, f_t, g_t
//     and c_{t-1} into c_t and tanh(c_t); the output gate forms h_t.
// The unit has a register file of NREG FP32 registers and the functional
// units FADD, FMUL, FEXP, FRECP and FCMP (the last inside the quantiser).
// Instructions run one at a time: each waits for its unit's latency, RECV
// waits for a value on an incoming link and SEND for link credit. Results
// from the DPU queue in a FIFO_DEPTH-entry FIFO, so the DPU goes on with the
// next neurons while the MU works (fifo_used and busy let the CU keep the
// FIFO from overflowing).
// Memory operands: LDW reads {bias, peephole weight} of neuron k from the
// weight buffer, LDC reads c_{t-1}[k] from the input buffer (zero at the
// first step of a pass), DEQ reads this gate's partial from the OM and maps
// it to FP32 with the dequantisation table. Each has its read latency.
// The step list follows the reference design's MU table; running the steps
// one at a time rather than in parallel is this design's choice (the
// reference design notes that the MU has slack).
module mu
  import epur_pkg::*;
#(
  parameter gate_e GATE        = G_INPUT,
  parameter int    FIFO_DEPTH  = 8,
  parameter int    NREG        = 8,
  parameter int    OM_WA_W     = 21,
  parameter int    OM_PART_BASE = 1048576,
  parameter int    WB_WA_W     = 19,
  parameter int    IB_A_W      = 10,
  parameter int    ADD_LAT     = 2,
  parameter int    MUL_LAT     = 4,
  parameter int    EXP_LAT     = 5,
  parameter int    RCP_LAT     = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  // DPU results
  input  logic               dpu_valid,
  input  logic [31:0]        dpu_data,
  input  dtag_t              dpu_tag,
  output logic [$clog2(FIFO_DEPTH):0] fifo_used,
  output logic               busy,
  // weight buffer word port
  output logic [WB_WA_W-1:0] wb_saddr,
  input  logic [31:0]        wb_sdata,
  // input buffer cell-state port
  output logic [IB_A_W-1:0]  c_raddr,
  input  logic [31:0]        c_rdata,
  // OM byte lane of this gate
  output logic [OM_WA_W-1:0] om_raddr,
  input  logic [7:0]         om_rdata,
  output logic               om_we,
  output logic [OM_WA_W-1:0] om_waddr,
  output logic [7:0]         om_wdata,
  // dequantisation table load
  input  logic               lut_we,
  input  logic [7:0]         lut_waddr,
  input  logic [31:0]        lut_wdata,
  // links
  input  logic [1:0]         recv_valid,
  input  logic [1:0][31:0]   recv_data,
  output logic [1:0]         recv_pop,
  output logic               send_valid,
  output logic [31:0]        send_data,
  input  logic               send_ready,
  // c_t and h_t broadcasts
  output logic               c_out_valid,
  output logic [31:0]        c_out_data,
  output logic               h_out_valid,
  output logic [31:0]        h_out_data,
  output dtag_t              out_tag
);
  // ---------------- input FIFO
  typedef struct packed {
    logic [31:0] v;
    dtag_t       tag;
  } item_t;
  item_t fifo [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH)-1:0] rp, wp;
  logic pop;
  item_t cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; fifo_used <= '0;
    end else begin
      if (dpu_valid) begin
        fifo[wp] <= '{v: dpu_data, tag: dpu_tag};
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      fifo_used <= fifo_used + dpu_valid - pop;
    end
  end
  assign cur = fifo[rp];

  // ---------------- functional units
  logic        add_go, mul_go, exp_go, rcp_go, q_go, add_sub;
  logic        add_v, mul_v, exp_v, rcp_v, q_v;
  logic [31:0] add_y, mul_y, exp_y, rcp_y, opa, opb;
  logic [7:0]  q_y;
  logic [31:0] lut_y;

  fp_add #(.LAT(ADD_LAT)) u_add (.clk, .rst_n, .in_valid(add_go), .a(opa), .b(opb),
                                 .sub(add_sub), .out_valid(add_v), .y(add_y));
  fp_mul #(.LAT(MUL_LAT)) u_mul (.clk, .rst_n, .in_valid(mul_go), .a(opa), .b(opb),
                                 .out_valid(mul_v), .y(mul_y));
  fp_exp #(.LAT(EXP_LAT)) u_exp (.clk, .rst_n, .in_valid(exp_go), .a(opa),
                                 .out_valid(exp_v), .y(exp_y));
  fp_rcp #(.LAT(RCP_LAT)) u_rcp (.clk, .rst_n, .in_valid(rcp_go), .a(opa),
                                 .out_valid(rcp_v), .y(rcp_y));
  quant8 u_q (.clk, .rst_n, .in_valid(q_go), .a(opa), .out_valid(q_v), .q(q_y));
  deq_lut u_lut (.clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
                 .q(om_rdata), .y(lut_y));

  // ---------------- sequencer
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} st_e;
  st_e         st;
  logic [4:0]  pc;
  logic [31:0] rf [NREG];
  mu_instr_t   ins;
  logic [1:0]  mem_cnt;      // remaining cycles of a memory read
  logic        phase;

  assign phase = cur.tag.phase;
  assign ins   = mu_prog(GATE, phase, int'(pc));
  assign opa   = rf[ins.ra];
  assign opb   = rf[ins.rb];
  assign busy  = (st != S_IDLE) || (fifo_used != 0);

  // addresses of this element's operands
  assign wb_saddr = WB_WA_W'(cfg.wb_param) + WB_WA_W'({cur.tag.k, 1'b0}) + WB_WA_W'(ins.imm);
  assign c_raddr  = IB_A_W'(cur.tag.k);
  assign om_raddr = OM_WA_W'(OM_PART_BASE) + OM_WA_W'(cur.tag.s * cfg.n_hid) + OM_WA_W'(cur.tag.k);
  assign om_waddr = om_raddr;
  assign om_wdata = q_y;
  assign om_we    = (st == S_WAIT) && (ins.op == OP_QNT) && q_v;
  assign out_tag  = cur.tag;

  logic issue, skip;
  assign issue = (st == S_ISSUE);
  assign skip  = ins.pp && !cfg.peephole;

  always_comb begin
    add_go = 1'b0; mul_go = 1'b0; exp_go = 1'b0; rcp_go = 1'b0; q_go = 1'b0;
    add_sub = (ins.op == OP_SUB);
    recv_pop = '0;
    send_valid = 1'b0;
    send_data  = opa;
    c_out_valid = 1'b0;
    c_out_data  = opa;
    h_out_valid = 1'b0;
    h_out_data  = opa;
    if (issue && !skip) begin
      unique case (ins.op)
        OP_ADD, OP_SUB: add_go = 1'b1;
        OP_MUL:         mul_go = 1'b1;
        OP_EXP:         exp_go = 1'b1;
        OP_RCP:         rcp_go = 1'b1;
        OP_QNT:         q_go   = 1'b1;
        OP_RECV:        recv_pop[ins.imm] = recv_valid[ins.imm];
        OP_SEND:        send_valid = 1'b1;
        OP_WRC:         c_out_valid = 1'b1;
        OP_WRH:         h_out_valid = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      pc <= '0;
      mem_cnt <= '0;
      pop <= 1'b0;
      for (int i = 0; i < NREG; i++) rf[i] <= '0;
    end else begin
      pop <= 1'b0;
      unique case (st)
        S_IDLE: if (fifo_used != 0 && !pop) begin
          st <= S_ISSUE;
          pc <= '0;
        end
        S_ISSUE: begin
          if (skip) pc <= pc + 1'b1;
          else begin
            unique case (ins.op)
              OP_END: begin
                pop <= 1'b1;
                st  <= S_IDLE;
              end
              OP_DPU: begin rf[ins.rd] <= cur.v;           pc <= pc + 1'b1; end
              OP_LDK: begin rf[ins.rd] <= FP_ONE;          pc <= pc + 1'b1; end
              OP_LDB: begin rf[ins.rd] <= cfg.beta[GATE];  pc <= pc + 1'b1; end
              OP_NEG: begin rf[ins.rd] <= fp_neg_f(opa);   pc <= pc + 1'b1; end
              OP_LDW, OP_LDC: begin mem_cnt <= 2'd1; st <= S_WAIT; end
              OP_DEQ:         begin mem_cnt <= 2'd2; st <= S_WAIT; end
              OP_RECV: if (recv_valid[ins.imm]) begin
                rf[ins.rd] <= recv_data[ins.imm];
                pc <= pc + 1'b1;
              end
              OP_SEND: if (send_ready) pc <= pc + 1'b1;
              OP_WRC, OP_WRH: pc <= pc + 1'b1;
              default: st <= S_WAIT;   // arithmetic and QNT
            endcase
          end
        end
        S_WAIT: begin
          unique case (ins.op)
            OP_LDW, OP_LDC, OP_DEQ: begin
              if (mem_cnt == 2'd1) begin
                st <= S_ISSUE;
                pc <= pc + 1'b1;
                if (ins.op == OP_LDW)      rf[ins.rd] <= wb_sdata;
                else if (ins.op == OP_DEQ) rf[ins.rd] <= lut_y;
                else                       rf[ins.rd] <= cur.tag.first_step ? 32'd0 : c_rdata;
              end
              mem_cnt <= mem_cnt - 1'b1;
            end
            OP_ADD, OP_SUB: if (add_v) begin rf[ins.rd] <= add_y; st <= S_ISSUE; pc <= pc + 1'b1; end
            OP_MUL: if (mul_v) begin rf[ins.rd] <= mul_y; st <= S_ISSUE; pc <= pc + 1'b1; end
            OP_EXP: if (exp_v) begin rf[ins.rd] <= exp_y; st <= S_ISSUE; pc <= pc + 1'b1; end
            OP_RCP: if (rcp_v) begin rf[ins.rd] <= rcp_y; st <= S_ISSUE; pc <= pc + 1'b1; end
            OP_QNT: if (q_v)   begin st <= S_ISSUE; pc <= pc + 1'b1; end
            default: st <= S_ISSUE;
          endcase
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    assert (!rst_n || !(dpu_valid && 32'(fifo_used) == FIFO_DEPTH && !pop))
      else $error("mu: DPU result FIFO overflow");
  end
endmodule
