// Traffic generator and checker standing in for one core complex in the
// tile, group and cluster testbenches.
//
// phase_i selects what it does; done_o rises when the phase is finished and
// falls when phase_i returns to 0.
//   1 fill:    unit-stride vector stores write memval(w) to every word w of
//              the K-word blocks b with b % NumCores == CoreId;
//   2 traffic: NumOps random vector loads (aligned unit-stride, unaligned
//              unit-stride, strided) on the K lanes, and random scalar loads
//              in parallel; every returned word is compared, lane by lane and
//              in order, with memval of its address;
//   3 probe:   one aligned unit-stride load at probe_addr_i with all
//              response ready; probe_lat_o is the number of cycles from the
//              request being taken to lane 0's data.
module core_driver
  import tcdm_pkg::*;
#(
  parameter int unsigned CoreId   = 0,
  parameter int unsigned NumCores = 1,
  parameter int unsigned MemWords = 256,
  parameter int unsigned NumOps   = 100
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic [1:0] phase_i,
  input  addr_t     probe_addr_i,
  output logic      done_o,
  output int        probe_lat_o,
  output int        checks_o,
  output int        failures_o,
  output logic      vq_v [K],
  input  logic      vq_r [K],
  output core_req_t vq   [K],
  input  logic      vs_v [K],
  output logic      vs_r [K],
  input  data_t     vs_d [K],
  output logic      sq_v,
  input  logic      sq_r,
  output core_req_t sq,
  input  logic      ss_v,
  output logic      ss_r,
  input  data_t     ss_d
);
  function automatic data_t memval(int unsigned w);
    return 32'(w) * 32'h9E3779B1 + 32'h1234;
  endfunction

  int    cyc = 0;
  data_t expq [K][$];
  data_t sexp [$];
  bit    all_ready = 0;
  bit    scalar_on = 0;

  always @(posedge clk_i) cyc++;

  task automatic check(bit ok, string what);
    checks_o++;
    if (!ok) begin
      failures_o++;
      $display("FAIL core %0d: %s", CoreId, what);
    end
  endtask

  // Response checkers.
  always @(negedge clk_i) begin
    for (int i = 0; i < K; i++) vs_r[i] = all_ready || ($urandom % 4 != 0);
    ss_r = all_ready || ($urandom % 4 != 0);
  end
  always @(posedge clk_i) if (rst_ni) begin
    for (int i = 0; i < K; i++) if (vs_v[i] && vs_r[i]) begin
      check(expq[i].size() > 0 && vs_d[i] == expq[i][0], $sformatf("lane %0d data %h", i, vs_d[i]));
      if (expq[i].size() > 0) void'(expq[i].pop_front());
    end
    if (ss_v && ss_r) begin
      check(sexp.size() > 0 && ss_d == sexp[0], "scalar data");
      if (sexp.size() > 0) void'(sexp.pop_front());
    end
  end

  task automatic offer(addr_t base, int stride, bit we);
    for (int i = 0; i < K; i++) begin
      vq_v[i]     = 1'b1;
      vq[i].addr  = base + addr_t'(stride * i);
      vq[i].we    = we;
      vq[i].wdata = memval(int'(vq[i].addr >> 2));
      vq[i].be    = 4'hf;
    end
  endtask

  task automatic issue(addr_t base, int stride, bit we);
    bit done [K];
    int left;
    offer(base, stride, we);
    left = K;
    for (int i = 0; i < K; i++) done[i] = 0;
    while (left > 0) begin
      @(posedge clk_i);
      for (int i = 0; i < K; i++) if (!done[i] && vq_v[i] && vq_r[i]) begin
        done[i] = 1; left--;
        if (!we) expq[i].push_back(memval(int'(vq[i].addr >> 2)));
      end
      @(negedge clk_i);
      for (int i = 0; i < K; i++) if (done[i]) vq_v[i] = 0;
    end
  endtask

  // Scalar load stream during the traffic phase.
  initial begin
    sq_v = 0; sq = '0;
    forever begin
      @(negedge clk_i);
      if (scalar_on && !sq_v && ($urandom % 4 == 0)) begin
        sq_v = 1; sq.we = 0; sq.be = 4'hf; sq.wdata = '0;
        sq.addr = addr_t'(($urandom % MemWords) * 4);
      end
      if (sq_v) begin
        @(posedge clk_i);
        while (!sq_r) @(posedge clk_i);
        sexp.push_back(memval(int'(sq.addr >> 2)));
        @(negedge clk_i);
        sq_v = 0;
      end
    end
  end

  initial begin
    done_o = 0; probe_lat_o = 0; checks_o = 0; failures_o = 0;
    for (int i = 0; i < K; i++) begin vq_v[i] = 0; vq[i] = '0; end
    forever begin
      @(negedge clk_i);
      if (phase_i == 0) done_o = 0;
      else if (!done_o) begin
        case (phase_i)
          2'd1: begin
            for (int b = int'(CoreId); b < int'(MemWords / K); b += int'(NumCores))
              issue(addr_t'(b * K * 4), 4, 1'b1);
          end
          2'd2: begin
            scalar_on = 1;
            for (int n = 0; n < int'(NumOps); n++) begin
              int kind, w;
              kind = $urandom % 4;
              case (kind)
                0, 1: issue(addr_t'(($urandom % (MemWords / K)) * K * 4), 4, 1'b0);
                2:    begin w = $urandom % (MemWords - K); issue(addr_t'(w * 4), 4, 1'b0); end
                default: begin
                  int s;
                  s = 2 + $urandom % 3;
                  w = $urandom % (MemWords - s * K);
                  issue(addr_t'(w * 4), 4 * s, 1'b0);
                end
              endcase
            end
            scalar_on = 0;
            while (sq_v) @(negedge clk_i);
            begin
              int guard;
              guard = 0;
              while (guard < 2000 && (sexp.size() > 0 || expq[0].size() > 0 || expq[1].size() > 0 ||
                                      expq[2].size() > 0 || expq[K-1].size() > 0)) begin
                @(negedge clk_i); guard++;
              end
              for (int i = 0; i < K; i++) check(expq[i].size() == 0, "lane drained");
              check(sexp.size() == 0, "scalar drained");
            end
          end
          default: begin
            int c0;
            all_ready = 1;
            offer(probe_addr_i, 4, 1'b0);
            @(posedge clk_i);
            while (!vq_r[0]) @(posedge clk_i);
            for (int i = 0; i < K; i++) expq[i].push_back(memval(int'((probe_addr_i >> 2) + i)));
            @(negedge clk_i);
            c0 = cyc;
            for (int i = 0; i < K; i++) vq_v[i] = 0;
            while (!vs_v[0]) @(negedge clk_i);
            probe_lat_o = cyc - c0 + 1;  // counted from the cycle the request was taken
            repeat (3) @(negedge clk_i);
            all_ready = 0;
          end
        endcase
        done_o = 1;
      end
    end
  end
endmodule
