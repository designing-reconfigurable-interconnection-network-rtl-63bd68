// tb_kf_vc_buffer -- random writes and pops on a 4-VC, 4-deep input buffer,
// compared against per-VC reference queues. Writes only go to VCs with room
// (as credit flow control guarantees); pops only to non-empty VCs.
module tb_kf_vc_buffer;
  import kf_noc_pkg::*;
  localparam int V = 4, D = 4;
  logic clk = 0, rst_n = 0;
  link_t in_link;
  logic [V-1:0] pop;
  flit_t front [V];
  logic [V-1:0] nonempty;
  flit_t q [V][$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kf_vc_buffer #(.NUM_VC(V), .BUF_DEPTH(D)) dut (.clk, .rst_n, .in_link, .pop, .front, .nonempty);

  initial begin
    in_link = '0; pop = '0;
    #12 rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare state
      for (int v = 0; v < V; v++) begin
        checks++;
        if (nonempty[v] !== (q[v].size() != 0)) begin
          failures++; $display("FAIL nonempty vc%0d cyc %0d", v, cyc);
        end else if (q[v].size() != 0 && front[v] !== q[v][0]) begin
          failures++; $display("FAIL front vc%0d cyc %0d", v, cyc);
        end
      end
      // new stimulus
      pop = '0;
      begin
        int pv;
        pv = $urandom_range(0, V);
        if (pv < V && q[pv].size() != 0) pop[pv] = 1'b1;
      end
      in_link = '0;
      if ($urandom_range(0, 3) != 0) begin
        int wv, room;
        wv = $urandom_range(0, V-1);
        room = D - q[wv].size() + (pop[wv] ? 1 : 0);
        if (room > 0) begin
          in_link.valid = 1'b1;
          in_link.flit.data = {8{$urandom()}};
          in_link.flit.vc = VC_ID_W'(wv);
          in_link.flit.head = $urandom_range(0,1);
          in_link.flit.dst_x = COORD_W'($urandom());
        end
      end
      @(posedge clk);
      #1;
      for (int v = 0; v < V; v++) if (pop[v]) void'(q[v].pop_front());
      if (in_link.valid) q[in_link.flit.vc].push_back(in_link.flit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
