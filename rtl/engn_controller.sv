// engn_controller: instruction buffer and sequencer of the accelerator.
//
// The host writes a program into the instruction buffer and pulses `start`.
// The controller executes the instructions from address 0 one after the
// other until OP_END, then pulses `done`. Which stage comes first
// (feature extraction before or after aggregation) and in which order the
// graph tiles are visited are decided by the compiler that writes the
// program; the hardware only executes the sequence. Operations (fields in
// engn_pkg::instr_t):
//   LOAD_DST  fill the DST RFs of a window of ROWS*DST_SLOTS destination
//             vertices starting at vertex id `a`: with the identity of the
//             aggregate operator (func[0] = 1), or from the DAVC on a hit and
//             from the result bank on a miss. One vertex per cycle; the write
//             into the array is one cycle after the lookup.
//   FEATURE   F = len cycles of MAC: property word a+k and weight word b+k
//             reach the array one cycle after their address; then the dot
//             products are latched into SRC RF. F+2 cycles. With func[0]
//             set the accumulator is not cleared first, so an input
//             dimension larger than the property bank is done in chunks.
//   AGG       start the edge parser on edge-bank address `a`, wait for it.
//   UPDATE    read the bias word `b`, then for every DST slot: load the
//             drain registers through the XPEs, shift them out of row 0 for
//             ROWS cycles writing result-bank line a + slot*ROWS + row.
//   VPU       for len pairs of lines: read A = a+2p, a+2p+1 and B = b+2p,
//             b+2p+1, run the VPU, write the two result lines to c+2p,
//             c+2p+1.
// The controller only sequences; the top level routes the data according
// to the select outputs. It also merges the ring_load/ring_shift requests
// of the edge parser into the array control word.
//
// The controller and instruction buffer exist in the published
// architecture; the instruction set, encoding and timing are this design's.
module engn_controller
  import engn_pkg::*;
#(
  parameter int unsigned ROWS        = engn_pkg::PE_ROWS,
  parameter int unsigned DST_SLOTS   = engn_pkg::DST_SLOTS,
  parameter int unsigned INSTR_DEPTH = engn_pkg::INSTR_DEPTH,
  localparam int unsigned IA_W       = $clog2(INSTR_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              instr_wr_en,
  input  logic [IA_W-1:0]   instr_wr_addr,
  input  instr_t            instr_wr_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // PE array control word
  output pe_ctrl_t          ctrl,
  // bank read addresses
  output logic [ADDR_W-1:0] prop_rd_addr,
  output logic [ADDR_W-1:0] w_rd_addr,
  output logic [ADDR_W-1:0] rb_rd_addr,
  // edge parser
  output logic              agg_start,
  output logic [ADDR_W-1:0] agg_base,
  input  logic              agg_ring_load,
  input  logic              agg_ring_shift,
  input  logic              agg_done,
  // DST window load
  output logic [VID_W-1:0]  lk_vid,       // DAVC lookup, same cycle as rb_rd_addr
  output logic              dst_wr_valid, // one cycle after the lookup
  output logic              dst_wr_clear, // write the identity instead of data
  output logic [ADDR_W-1:0] dst_wr_row,
  output logic [SLOT_W-1:0] dst_wr_slot,
  output data_t             dst_clear_value,
  // update
  output logic              bias_latch,   // weight-bank data is the bias
  // result-bank write
  output logic              rb_wr_en,
  output logic [ADDR_W-1:0] rb_wr_addr,
  output logic [1:0]        rb_wr_src,    // 0: drain line, 1: VPU low half, 2: VPU high half
  // VPU
  output logic              opnd_cap,     // capture rb_rd_data as operand quarter opnd_sel
  output logic [1:0]        opnd_sel,     // 0: A low, 1: A high, 2: B low, 3: B high
  output logic              vpu_in_valid,
  output vpu_op_e           vpu_op
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_FINISH} state_e;

  instr_t          imem [INSTR_DEPTH];
  state_e          state_q;
  logic [IA_W-1:0] pc_q;
  instr_t          ir_q;
  logic [ADDR_W-1:0] cnt_q;       // main counter (vertex, k, row, pair)
  logic [SLOT_W-1:0] slot_q;
  logic [3:0]      ph_q;          // phase inside an instruction
  // delayed DST-load write
  logic            ldv_q;
  logic [ADDR_W-1:0] ldrow_q;
  logic [SLOT_W-1:0] ldslot_q;
  // delayed MAC enable
  logic            macv_q;

  localparam int unsigned WIN = ROWS * DST_SLOTS;

  always_ff @(posedge clk) begin
    if (instr_wr_en) imem[instr_wr_addr] <= instr_wr_data;
  end

  // ------------------------------------------------------------ outputs
  always_comb begin
    ctrl            = '0;
    ctrl.agg_op     = agg_op_e'(ir_q.func[1:0]);
    ctrl.act        = act_e'(ir_q.func[1:0]);
    ctrl.shift      = ir_q.shift;
    ctrl.drain_slot = slot_q;
    ctrl.ring_load  = agg_ring_load;
    ctrl.ring_shift = agg_ring_shift;
    ctrl.mac_en     = macv_q;
    prop_rd_addr    = ir_q.a + cnt_q;
    w_rd_addr       = ir_q.b + cnt_q;
    rb_rd_addr      = ir_q.a + cnt_q;
    lk_vid          = VID_W'(ir_q.a + cnt_q);
    agg_start       = 1'b0;
    agg_base        = ir_q.a;
    bias_latch      = 1'b0;
    rb_wr_en        = 1'b0;
    rb_wr_addr      = ir_q.a + ADDR_W'(int'(slot_q) * ROWS) + cnt_q;
    rb_wr_src       = 2'd0;
    opnd_cap        = 1'b0;
    opnd_sel        = 2'd0;
    vpu_in_valid    = 1'b0;
    vpu_op          = vpu_op_e'(ir_q.func);
    dst_wr_valid    = ldv_q;
    dst_wr_clear    = ir_q.func[0];
    dst_wr_row      = ldrow_q;
    dst_wr_slot     = ldslot_q;
    dst_clear_value = agg_identity(agg_op_e'(ir_q.func[3:2]));

    if (state_q == S_EXEC) begin
      case (ir_q.op)
        OP_FEATURE: begin
          ctrl.mac_clr   = (ph_q == 4'd0) && !ir_q.func[0];
          ctrl.src_latch = (ph_q == 4'd2);
        end
        OP_AGG: begin
          agg_start = (ph_q == 4'd0);
        end
        OP_UPDATE: begin
          w_rd_addr        = ir_q.b;
          bias_latch       = (ph_q == 4'd1);
          ctrl.drain_load  = (ph_q == 4'd2);
          ctrl.drain_shift = (ph_q == 4'd3);
          rb_wr_en         = (ph_q == 4'd3);
        end
        OP_VPU: begin
          // ph 0..3 read A lo, A hi, B lo, B hi; capture one cycle later
          case (ph_q)
            4'd0: rb_rd_addr = ir_q.a + 2 * cnt_q;
            4'd1: rb_rd_addr = ir_q.a + 2 * cnt_q + 1;
            4'd2: rb_rd_addr = ir_q.b + 2 * cnt_q;
            4'd3: rb_rd_addr = ir_q.b + 2 * cnt_q + 1;
            default: rb_rd_addr = ir_q.a;
          endcase
          opnd_cap     = (ph_q >= 4'd1) && (ph_q <= 4'd4);
          opnd_sel     = 2'(ph_q - 4'd1);
          vpu_in_valid = (ph_q == 4'd5);
          rb_wr_en     = (ph_q == 4'd6) || (ph_q == 4'd7);
          rb_wr_src    = (ph_q == 4'd7) ? 2'd2 : 2'd1;
          rb_wr_addr   = ir_q.c + 2 * cnt_q + ((ph_q == 4'd7) ? 1 : 0);
        end
        default: ;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      pc_q     <= '0;
      ir_q     <= '0;
      cnt_q    <= '0;
      slot_q   <= '0;
      ph_q     <= '0;
      ldv_q    <= 1'b0;
      ldrow_q  <= '0;
      ldslot_q <= '0;
      macv_q   <= 1'b0;
      done     <= 1'b0;
    end else begin
      done   <= 1'b0;
      ldv_q  <= 1'b0;
      macv_q <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          pc_q    <= '0;
          state_q <= S_FETCH;
        end
        S_FETCH: begin
          ir_q    <= imem[pc_q];
          pc_q    <= pc_q + 1'b1;
          cnt_q   <= '0;
          slot_q  <= '0;
          ph_q    <= '0;
          state_q <= (imem[pc_q].op == OP_END) ? S_FINISH : S_EXEC;
        end
        S_EXEC: begin
          case (ir_q.op)
            OP_LOAD_DST: begin
              ldv_q    <= 1'b1;
              ldrow_q  <= ADDR_W'(int'(cnt_q) % ROWS);
              ldslot_q <= SLOT_W'(int'(cnt_q) / ROWS);
              cnt_q    <= cnt_q + 1'b1;
              if (int'(cnt_q) == WIN - 1) state_q <= S_FETCH;
            end
            OP_FEATURE: begin
              // ph 0: clear + address 0; ph 1: stream; ph 2: latch
              case (ph_q)
                4'd0, 4'd1: begin
                  macv_q <= (int'(cnt_q) < int'(ir_q.len));
                  cnt_q  <= cnt_q + 1'b1;
                  ph_q   <= 4'd1;
                  if (int'(cnt_q) >= int'(ir_q.len)) ph_q <= 4'd2;
                end
                default: state_q <= S_FETCH;
              endcase
            end
            OP_AGG: begin
              if (ph_q == 4'd0) ph_q <= 4'd1;
              else if (agg_done) state_q <= S_FETCH;
            end
            OP_UPDATE: begin
              case (ph_q)
                4'd0: ph_q <= 4'd1;
                4'd1: ph_q <= 4'd2;
                4'd2: begin
                  ph_q  <= 4'd3;
                  cnt_q <= '0;
                end
                default: begin
                  cnt_q <= cnt_q + 1'b1;
                  if (int'(cnt_q) == ROWS - 1) begin
                    slot_q <= slot_q + 1'b1;
                    ph_q   <= 4'd2;
                    if (int'(slot_q) == DST_SLOTS - 1) state_q <= S_FETCH;
                  end
                end
              endcase
            end
            OP_VPU: begin
              if (ir_q.len == '0) begin
                state_q <= S_FETCH;
              end else if (ph_q == 4'd7) begin
                ph_q  <= 4'd0;
                cnt_q <= cnt_q + 1'b1;
                if (cnt_q + 1'b1 == ir_q.len) state_q <= S_FETCH;
              end else begin
                ph_q <= ph_q + 1'b1;
              end
            end
            default: state_q <= S_FETCH;
          endcase
        end
        S_FINISH: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
