// pe_line: one PE line, the unit that performs 1D convolutions.
//
// A PE line holds DIM_F bit-serial MACs, an input FIFO of DIM_F+S-1
// activations and two rebuild engines (RE A and RE B). It runs a list of up to
// S "jobs"; a job is one 1D convolution of an input row with one rebuilt
// weight row: in 2D CONV mode job j is kernel row j of this line's input
// channel, in depth-wise mode the line runs a single job, kernel row c of the
// channel. For a job, the RE rebuilds the S weights of the row one per step;
// each weight is shared by all MACs, MAC f multiplies it with FIFO entry f,
// and the FIFO shifts by one entry between steps (1D row stationary: after S
// steps MAC f holds sum_s W[s] * I[f+s]). Psums stay in the MACs across all
// jobs, so after the list the line holds one 2D convolution result per MAC.
//
// Sparsity: `job_mask` already holds only the selected jobs (weight row and
// input row both non-zero); unselected rows are neither read nor computed.
// A step lasts until every MAC has consumed all non-zero Booth digits of its
// activation (at least one cycle), so zero activation bits save time.
//
// Input FIFO double buffering: while the front buffer is being computed on,
// the next selected row is already read from the input GB into the back
// buffer (read port: rd_req/rd_gnt, data one cycle after the grant).
//
// REs: the two REs work ping-pong. `re_act` picks the RE used for computing;
// basis loads (bl_*) may target the other RE while this one computes, so the
// next filter's basis is in place when the pass ends. In MODE_CLUSTER both
// REs compute: MACs [0, DIM_F/2) take RE A's weight, the rest RE B's (the
// MUXes at the bottom of the MAC array); RE A uses the low coefficient row of
// the slot, RE B the high one.
//
// Timing: `start` clears the psums and launches the job list; `done` is high
// when the line is idle. Each job costs one load cycle plus S steps.
// Own choices: the job/slot interface, the read handshake and that the
// coefficient row of a job is loaded into the RE in the cycle the job's input
// row moves from the back to the front buffer.
module pe_line
  import se_pkg::*;
#(
  parameter int unsigned F  = DIM_F,
  parameter int unsigned S  = KS,
  parameter int unsigned AB = $clog2(IN_BANKS),
  parameter int unsigned AA = $clog2(IN_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  mode_e                         mode,
  input  logic                          raw,
  input  logic                          re_act,
  // basis loading (MUX1 path 2)
  input  logic                          bl_valid,
  input  logic                          bl_re,
  input  logic [$clog2(S)-1:0]          bl_row,
  input  logic [S*BAS_W-1:0]            bl_data,
  // coefficient / original weight slot of job jb_idx
  input  logic                          jb_valid,
  input  logic [$clog2(S)-1:0]          jb_idx,
  input  logic [S*BAS_W-1:0]            jb_slot,
  // job list
  input  logic                          start,
  input  logic [S-1:0]                  job_mask,
  input  logic [S-1:0][AB-1:0]          job_bank,
  input  logic [S-1:0][AA-1:0]          job_addr,
  // input GB read port
  output logic                          rd_req,
  output logic [AB-1:0]                 rd_bank,
  output logic [AA-1:0]                 rd_addr,
  input  logic                          rd_gnt,
  input  logic                          rd_valid,
  input  logic [(F+S-1)*ACT_W-1:0]      rd_data,
  // results
  output logic signed [F-1:0][PSUM_W-1:0] psum,
  output logic                          done
);
  localparam int unsigned L  = F + S - 1;
  localparam int unsigned JW = $clog2(S);

  // ------------------------------------------------------------ job storage
  logic [S-1:0][S*BAS_W-1:0] slot_q;
  logic [S-1:0][AB-1:0]      bank_q;
  logic [S-1:0][AA-1:0]      addr_q;
  logic [S-1:0]              fetch_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slot_q <= '0;
    else if (jb_valid) slot_q[jb_idx] <= jb_slot;
  end

  // ------------------------------------------------------------ fetch (back buffer)
  logic                          pending, back_full;
  logic [JW-1:0]                 pend_job, back_job;
  logic signed [ACT_W-1:0]       back  [L];
  logic signed [ACT_W-1:0]       front [L];

  logic [JW-1:0] fj;
  logic          fj_ok;
  always_comb begin
    fj = '0; fj_ok = 1'b0;
    for (int j = S-1; j >= 0; j--)
      if (fetch_mask[j]) begin fj = JW'(j); fj_ok = 1'b1; end
  end

  assign rd_req  = fj_ok && !back_full && !pending && !start;
  assign rd_bank = bank_q[fj];
  assign rd_addr = addr_q[fj];

  // ------------------------------------------------------------ compute
  logic              computing;
  logic [JW-1:0]     step;
  logic [F-1:0]      mac_busy;
  logic              any_busy;
  logic              load_front, mac_start;

  assign any_busy   = |mac_busy;
  assign load_front = !computing && back_full;
  assign mac_start  = computing && !any_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_mask <= '0;
      bank_q     <= '0;
      addr_q     <= '0;
      pending    <= 1'b0;
      pend_job   <= '0;
      back_full  <= 1'b0;
      back_job   <= '0;
      computing  <= 1'b0;
      step       <= '0;
      for (int i = 0; i < L; i++) begin back[i] <= '0; front[i] <= '0; end
    end else begin
      if (start) begin
        fetch_mask <= job_mask;
        bank_q     <= job_bank;
        addr_q     <= job_addr;
      end else if (rd_req && rd_gnt) begin
        fetch_mask[fj] <= 1'b0;
        pending        <= 1'b1;
        pend_job       <= fj;
      end
      if (pending && rd_valid) begin
        for (int i = 0; i < L; i++) back[i] <= rd_data[i*ACT_W +: ACT_W];
        back_job  <= pend_job;
        back_full <= 1'b1;
        pending   <= 1'b0;
      end else if (load_front) begin
        back_full <= 1'b0;
      end
      if (load_front) begin
        for (int i = 0; i < L; i++) front[i] <= back[i];
        computing <= 1'b1;
        step      <= '0;
      end else if (mac_start) begin
        // FIFO shift: entry i takes entry i+1
        for (int i = 0; i < L-1; i++) front[i] <= front[i+1];
        front[L-1] <= '0;
        step <= step + 1'b1;
        if (step == JW'(S-1)) computing <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ rebuild engines
  logic [S*BAS_W-1:0] cur_slot;
  assign cur_slot = slot_q[back_job];

  logic                     ldv_a, ldv_b;
  ld_type_e                 ldt_a, ldt_b;
  logic [JW-1:0]            ldr;
  logic [S*BAS_W-1:0]       ldd_a, ldd_b;
  logic signed [WGT_W-1:0]  w_a, w_b;
  logic                     raw_a, raw_b;

  always_comb begin
    ldv_a = 1'b0; ldv_b = 1'b0;
    ldt_a = LD_COEF; ldt_b = LD_COEF;
    ldd_a = '0; ldd_b = '0;
    ldr   = bl_row;
    if (bl_valid) begin
      // basis loads have the port in their cycle; the controller never
      // overlaps them with a job's coefficient load on the same RE
      if (!bl_re) begin ldv_a = 1'b1; ldt_a = LD_BASIS; ldd_a = bl_data; end
      else        begin ldv_b = 1'b1; ldt_b = LD_BASIS; ldd_b = bl_data; end
    end
    if (load_front) begin
      if (mode == MODE_CLUSTER) begin
        ldv_a = 1'b1; ldt_a = LD_COEF; ldd_a = (S*BAS_W)'(cur_slot[S*COEF_W-1:0]);
        ldv_b = 1'b1; ldt_b = LD_COEF; ldd_b = (S*BAS_W)'(cur_slot[2*S*COEF_W-1:S*COEF_W]);
      end else if (!re_act) begin
        ldv_a = 1'b1; ldt_a = raw ? LD_RAW : LD_COEF; ldd_a = cur_slot;
      end else begin
        ldv_b = 1'b1; ldt_b = raw ? LD_RAW : LD_COEF; ldd_b = cur_slot;
      end
    end
  end

  rebuild_engine #(.S(S)) u_re_a (
    .clk, .rst_n, .ld_valid(ldv_a), .ld_type(ldt_a), .ld_row(ldr), .ld_data(ldd_a),
    .col(step), .weight(w_a), .raw_mode(raw_a));
  rebuild_engine #(.S(S)) u_re_b (
    .clk, .rst_n, .ld_valid(ldv_b), .ld_type(ldt_b), .ld_row(ldr), .ld_data(ldd_b),
    .col(step), .weight(w_b), .raw_mode(raw_b));

  // ------------------------------------------------------------ MAC array
  for (genvar f = 0; f < F; f++) begin : g_mac
    logic signed [WGT_W-1:0] w_f;
    always_comb begin
      if (mode == MODE_CLUSTER) w_f = (f < F/2) ? w_a : w_b;
      else                      w_f = re_act ? w_b : w_a;
    end
    mac u_mac (
      .clk, .rst_n, .clr(start), .start(mac_start), .weight(w_f), .act(front[f]),
      .busy(mac_busy[f]), .psum(psum[f]));
  end

  assign done = !start && !computing && !back_full && !pending && !fj_ok && !any_busy;

  // a read is only granted when requested
  a_gnt: assert property (@(posedge clk) disable iff (!rst_n) rd_gnt |-> rd_req);

endmodule
