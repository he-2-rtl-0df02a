// xpu_controller: group-level pipeline scheduler of the xPU.
//
// A ModUp or ModDown is split into DNUM decomposed groups and each group
// passes through NSTAGE stages in order (for instance: load+INTT, BConv+NTT,
// transfer to the xMU). Every stage has one engine, so at most one group is
// in a stage at a time, but different groups occupy different stages at the
// same time: the transfer of one group overlaps the transforms of the next,
// and the transforms of consecutive groups overlap one another. That is the
// paper's dual-level overlap (computation-communication and inter-operator).
//
// Rule: group g enters stage s when (1) g has finished stage s-1, (2) stage
// s is idle, (3) group g-1 has entered stage s (groups stay in order) and
// (4) group g-NBUF has finished stage s+1, because stage s writes the
// buffer set g mod NBUF that stage s+1 of group g-NBUF still reads.
// The controller pulses stage_start[s] with stage_group[s] and waits for
// stage_done[s]. Counters: cycles with two or more stages busy
// (overlap_cycles) and cycles in which a group was ready for a stage but had
// to wait (wait_cycles). `done` pulses after the last group's last stage.
// The scheduling rule and counters are this design's own formulation of the
// pipelining the paper describes.
module xpu_controller #(
  parameter int DNUM   = 3,
  parameter int NSTAGE = 3,
  parameter int NBUF   = 2,
  localparam int GW    = $clog2(DNUM + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          stage_start [NSTAGE],
  output logic [GW-1:0] stage_group [NSTAGE],
  input  logic          stage_done  [NSTAGE],
  output logic [31:0]   overlap_cycles,
  output logic [31:0]   wait_cycles
);
  // next[s]: next group to enter stage s; fin[s]: groups that finished s
  logic [GW-1:0] next [NSTAGE];
  logic [GW-1:0] fin  [NSTAGE];
  logic          sbusy[NSTAGE];
  logic          go   [NSTAGE];
  logic          rdy  [NSTAGE];

  always_comb begin
    for (int s = 0; s < NSTAGE; s++) begin
      automatic logic dep_prev = (s == 0) ? 1'b1 : (fin[s-1] > next[s]);
      automatic logic dep_buf  = 1'b1;
      if (s < NSTAGE - 1 && next[s] >= GW'(NBUF))
        dep_buf = (fin[s+1] >= next[s] - GW'(NBUF) + 1'b1);
      rdy[s] = busy && (next[s] < GW'(DNUM)) && dep_prev;
      go[s]  = rdy[s] && !sbusy[s] && dep_buf;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; overlap_cycles <= '0; wait_cycles <= '0;
      for (int s = 0; s < NSTAGE; s++) begin
        next[s] <= '0; fin[s] <= '0; sbusy[s] <= 1'b0;
        stage_start[s] <= 1'b0; stage_group[s] <= '0;
      end
    end else begin
      automatic int nb = 0;
      automatic int nw = 0;
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        for (int s = 0; s < NSTAGE; s++) begin
          next[s] <= '0; fin[s] <= '0; sbusy[s] <= 1'b0;
        end
      end
      for (int s = 0; s < NSTAGE; s++) begin
        stage_start[s] <= 1'b0;
        if (go[s]) begin
          stage_start[s] <= 1'b1;
          stage_group[s] <= next[s];
          next[s]        <= next[s] + 1'b1;
          sbusy[s]       <= 1'b1;
        end else if (sbusy[s] && stage_done[s]) begin
          sbusy[s] <= 1'b0;
          fin[s]   <= fin[s] + 1'b1;
        end
        if (sbusy[s]) nb++;
        if (rdy[s] && !go[s] && !(sbusy[s] && stage_done[s])) nw++;
      end
      if (busy) begin
        if (nb >= 2) overlap_cycles <= overlap_cycles + 1;
        wait_cycles <= wait_cycles + 32'(nw);
      end
      if (busy && fin[NSTAGE-1] == GW'(DNUM - 1) && sbusy[NSTAGE-1] && stage_done[NSTAGE-1]) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end
endmodule
