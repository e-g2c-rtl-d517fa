// controller: instruction fetch and sequencing of the e-G2C processor.
//
// After `start` it fetches 32-bit instructions from the instruction SRAM, starting at address 0,
// and runs them until HALT, when `done` is raised. One instruction is fetched (1 cycle) and
// executed at a time. Most instructions take one cycle. LDACT starts a background loader that
// streams `cnt` Act GB words into one bank of the temporary act buffer (one per cycle) while
// the controller moves on, so a COMP on the other bank runs at the same time. COMP streams the
// weight GB and index SRAM into the MAC lanes (one weight word per cycle: 3 per sparse vector
// for 4-bit power-of-2 weights, 6 for 8-bit weights). STORE and DET hand the lane results to
// the output act buffer, which also works on its own. Stalls: LDACT waits for a running load;
// COMP waits while its bank is being loaded; STORE, DET, BRN and SETA wait while the output act
// buffer or the adaptation engine is busy; SWAP and HALT also wait for the loader. BRN jumps when
// the last detection was normal, which is how the program chooses the coarse convertor over the
// precise one. The paper gives only that a controller reads 32-bit instructions from the
// instruction SRAM; the instruction set below is this design's:
//   [31:28] opcode (eg2c_pkg::opcode_e)
//   SETW  [10:0] weight GB pointer, [21:11] index SRAM pointer
//   LDACT [8:0] Act GB word, [14:9] byte offset, [18:15] first temp row, [22:19] rows-1,
//         [23] temp buffer bank
//   COMP  [7:0] vectors-1, [8] point-wise, [9] 8-bit weights, [10] clear accumulators,
//         [11] temp buffer bank
//   STORE [8:0] Act GB word for lane 0, [14:9] byte offset, [19:15] lanes-1, [23:20] shift,
//         [24] ReLU, [25] 16-bit output
//   DET   [4:0] lanes-1, [8:5] shift
//   BRN, JMP [9:0] target
//   SETA  [19:0] data, [24:20] register select (see adapt_engine)
// The read pointers auto-increment, so consecutive COMPs walk through the weight stream.
module controller #(
  parameter int unsigned IAW = 10,   // instruction SRAM: 1024 x 32b = 4KB
  parameter int unsigned WAW = 11,   // weight GB words
  parameter int unsigned XAW = 11,   // index SRAM words
  parameter int unsigned GAW = 9     // Act GB words
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     done,
  output logic                     running,
  // instruction SRAM
  output logic                     i_en,
  output logic [IAW-1:0]           i_addr,
  input  logic [eg2c_pkg::INSTW-1:0] i_rdata,
  // weight GB / index SRAM reads and the matching lane control (aligned with the read data)
  output logic                     w_en,
  output logic [WAW-1:0]           w_addr,
  output logic                     x_en,
  output logic [XAW-1:0]           x_addr,
  output eg2c_pkg::lane_ctrl_t     lctrl,
  // input Act GB reads and temporary act buffer fill (fill aligned with the read data)
  output logic                     g_re,
  output logic [GAW-1:0]           g_raddr,
  output logic                     t_we,
  output logic                     t_bank,
  output logic [3:0]               t_row,
  output logic [5:0]               t_ofs,
  output logic                     src,          // 0: GB0 is input, GB1 output
  // output act buffer
  output logic                     ob_store,
  output logic                     ob_det,
  output logic [GAW-1:0]           ob_base,
  output logic [5:0]               ob_ofs,
  output logic [4:0]               ob_nl_m1,
  output logic [3:0]               ob_shift,
  output logic                     ob_relu,
  output logic                     ob_w16,
  input  logic                     ob_busy,
  // adaptation engine
  output logic                     a_we,
  output logic [4:0]               a_sel,
  output logic [19:0]              a_data,
  input  logic                     a_busy,
  input  logic                     a_normal,
  // activity counters for observation
  output logic [31:0]              stall_cycles,
  output logic [15:0]              branches_taken,
  output logic [31:0]              overlap_cycles   // cycles with a load and a COMP both active
);
  import eg2c_pkg::*;
  typedef enum logic [1:0] {C_IDLE, C_FETCH, C_EXEC, C_COMP} cstate_e;
  cstate_e state;

  logic [IAW-1:0]   pc;
  opcode_e          op;
  logic [WAW-1:0]   wptr;
  logic [XAW-1:0]   xptr;
  // LDACT
  logic [GAW-1:0]   ld_addr;
  logic [3:0]       ld_row, ld_left;
  logic [5:0]       ld_ofs;
  logic             ld_busy, ld_bank;
  // COMP
  logic [7:0]       vec, nvec_m1;
  logic [1:0]       tap;
  logic             hi, cmp_pw, cmp_i8, cmp_clr, cmp_bank;
  logic             stall;

  assign op      = opcode_e'(i_rdata[31:28]);
  assign running = (state != C_IDLE);

  // stall rule of the executing instruction
  always_comb begin
    unique case (op)
      OP_STORE, OP_DET, OP_BRN, OP_SETA: stall = ob_busy || a_busy;
      OP_SWAP, OP_HALT:                  stall = ob_busy || a_busy || ld_busy;
      OP_LDACT:                          stall = ld_busy;
      OP_COMP:                           stall = ld_busy && ld_bank == i_rdata[11];
      default:                           stall = 1'b0;
    endcase
  end

  always_comb begin
    i_en   = (state == C_FETCH);
    i_addr = pc;
    // instruction fields, combinational from the instruction SRAM output during C_EXEC
    ob_store = (state == C_EXEC) && op == OP_STORE && !stall;
    ob_det   = (state == C_EXEC) && op == OP_DET   && !stall;
    ob_base  = i_rdata[8:0];
    ob_ofs   = i_rdata[14:9];
    ob_nl_m1 = (op == OP_DET) ? i_rdata[4:0]  : i_rdata[19:15];
    ob_shift = (op == OP_DET) ? i_rdata[8:5]  : i_rdata[23:20];
    ob_relu  = i_rdata[24];
    ob_w16   = i_rdata[25];
    a_we     = (state == C_EXEC) && op == OP_SETA && !stall;
    a_sel    = i_rdata[24:20];
    a_data   = i_rdata[19:0];
    // streams
    g_re     = ld_busy;
    g_raddr  = ld_addr;
    w_en     = (state == C_COMP);
    w_addr   = wptr;
    x_en     = (state == C_COMP) && tap == 2'd0 && !hi;
    x_addr   = xptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; wptr <= '0; xptr <= '0; src <= 1'b0; done <= 1'b0;
      ld_addr <= '0; ld_row <= '0; ld_left <= '0; ld_ofs <= '0; ld_busy <= 1'b0; ld_bank <= 1'b0;
      t_bank <= 1'b0; cmp_bank <= 1'b0; overlap_cycles <= '0;
      vec <= '0; nvec_m1 <= '0; tap <= '0; hi <= 1'b0; cmp_pw <= 1'b0; cmp_i8 <= 1'b0;
      cmp_clr <= 1'b0; lctrl <= '0; t_we <= 1'b0; t_row <= '0; t_ofs <= '0;
      stall_cycles <= '0; branches_taken <= '0;
    end else begin
      // defaults of the aligned (one cycle later) controls
      lctrl <= '0;
      t_we  <= 1'b0;
      // background loader: Act GB -> temporary act buffer
      if (ld_busy) begin
        t_we    <= 1'b1;
        t_bank  <= ld_bank;
        t_row   <= ld_row;
        t_ofs   <= ld_ofs;
        ld_addr <= ld_addr + 1'b1;
        ld_row  <= ld_row + 1'b1;
        ld_left <= ld_left - 1'b1;
        if (ld_left == '0) ld_busy <= 1'b0;
        if (state == C_COMP) overlap_cycles <= overlap_cycles + 1'b1;
      end
      case (state)
        C_IDLE: if (start) begin
          pc <= '0; src <= 1'b0; done <= 1'b0; state <= C_FETCH;
        end
        C_FETCH: state <= C_EXEC;
        C_EXEC: begin
          if (stall) stall_cycles <= stall_cycles + 1'b1;
          else begin
            pc    <= pc + 1'b1;
            state <= C_FETCH;
            case (op)
              OP_HALT: begin done <= 1'b1; state <= C_IDLE; end
              OP_SETW: begin wptr <= i_rdata[WAW-1:0]; xptr <= i_rdata[11 +: XAW]; end
              OP_LDACT: begin
                ld_addr <= i_rdata[8:0]; ld_ofs <= i_rdata[14:9]; ld_row <= i_rdata[18:15];
                ld_left <= i_rdata[22:19]; ld_bank <= i_rdata[23]; ld_busy <= 1'b1;
              end
              OP_COMP: begin
                nvec_m1 <= i_rdata[7:0]; cmp_pw <= i_rdata[8]; cmp_i8 <= i_rdata[9];
                cmp_clr <= i_rdata[10]; cmp_bank <= i_rdata[11]; vec <= '0; tap <= '0; hi <= 1'b0; state <= C_COMP;
              end
              OP_SWAP: src <= ~src;
              OP_BRN: if (a_normal) begin
                pc <= i_rdata[IAW-1:0]; branches_taken <= branches_taken + 1'b1;
              end
              OP_JMP: pc <= i_rdata[IAW-1:0];
              default: ;
            endcase
          end
        end
        C_COMP: begin
          lctrl.valid     <= 1'b1;
          lctrl.tap       <= tap;
          lctrl.new_vec   <= (tap == 2'd0) && !hi;
          lctrl.first_vec <= (vec == '0);
          lctrl.hi        <= hi;
          lctrl.clr       <= cmp_clr;
          lctrl.bank      <= cmp_bank;
          lctrl.wfmt      <= cmp_i8 ? WF_INT8 : WF_POT4;
          lctrl.mode      <= cmp_pw ? CM_PW : CM_RIR;
          wptr <= wptr + 1'b1;
          if (tap == 2'd0 && !hi) xptr <= xptr + 1'b1;
          if (cmp_i8 && !hi) hi <= 1'b1;
          else begin
            hi <= 1'b0;
            if (tap == 2'(KTAPS - 1)) begin
              tap <= '0;
              vec <= vec + 1'b1;
              if (vec == nvec_m1) state <= C_FETCH;
            end else tap <= tap + 1'b1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
