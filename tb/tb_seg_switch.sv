// tb_seg_switch: random switch settings and random traffic on all four
// sides of one segmentation switch. The expected outputs are worked out here
// path by path: what leaves on each segment, what each device receives, and
// the ready each sender sees (the AND of the readies of all its receivers),
// the 'go' bit sent along with the event and the commit each receiver sees.
module tb_seg_switch;
  import mubrain_pkg::*;

  sw_cfg_t   cfg;
  logic      tx_valid [2], tx_ready [2], rx_valid [2], rx_commit [2], rx_ready [2];
  aer_addr_t tx_addr [2], rx_addr [2];
  seg_evt_t  r_in, l_out, r_out, l_in;
  logic      r_ready_out, l_ready_in, r_ready_in, l_ready_out;
  int checks = 0, failures = 0;
  int n_pass = 0, n_inj = 0, n_loc = 0;

  seg_switch dut (.cfg, .tx_valid, .tx_addr, .tx_ready, .rx_valid, .rx_commit, .rx_addr, .rx_ready,
                  .r_in, .l_out, .r_ready_out, .l_ready_in,
                  .r_out, .l_in, .r_ready_in, .l_ready_out);

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cfg %h)", what, cfg);
    end
  endtask

  initial begin
    for (int it = 0; it < 5000; it++) begin
      bit exp_v; aer_addr_t exp_a; bit exp_r; bit exp_g;
      // legal settings: inject and pass are exclusive per direction
      cfg = '0;
      case ($urandom_range(0, 2))
        0: ;
        1: begin cfg.inj_r = 1; cfg.inj_r_side = 1'($urandom); end
        default: cfg.pass_r = 1;
      endcase
      case ($urandom_range(0, 2))
        0: ;
        1: begin cfg.inj_l = 1; cfg.inj_l_side = 1'($urandom); end
        default: cfg.pass_l = 1;
      endcase
      cfg.loc = 1'($urandom); cfg.loc_side = 1'($urandom);
      for (int s = 0; s < 2; s++) begin
        cfg.rx_en[s]   = 1'($urandom);
        cfg.rx_from[s] = rx_from_e'($urandom_range(0, 2));
        tx_valid[s] = 1'($urandom); tx_addr[s] = aer_addr_t'($urandom);
        rx_ready[s] = 1'($urandom);
      end
      r_in = '{valid: 1'($urandom), go: 1'($urandom), addr: aer_addr_t'($urandom)};
      l_in = '{valid: 1'($urandom), go: 1'($urandom), addr: aer_addr_t'($urandom)};
      r_ready_in = 1'($urandom); l_ready_in = 1'($urandom);
      #1;
      // right segment ('go' of an injected event = that sender's ready)
      if (cfg.inj_r)       begin exp_v = tx_valid[cfg.inj_r_side]; exp_a = tx_addr[cfg.inj_r_side]; exp_g = tx_ready[cfg.inj_r_side]; n_inj++; end
      else if (cfg.pass_r) begin exp_v = r_in.valid; exp_a = r_in.addr; exp_g = r_in.go; n_pass++; end
      else                 begin exp_v = 0; exp_a = r_out.addr; exp_g = r_out.go; end
      check(r_out.valid == exp_v && (!exp_v || (r_out.addr == exp_a && r_out.go == exp_g)), "right segment");
      // left segment
      if (cfg.inj_l)       begin exp_v = tx_valid[cfg.inj_l_side]; exp_a = tx_addr[cfg.inj_l_side]; exp_g = tx_ready[cfg.inj_l_side]; end
      else if (cfg.pass_l) begin exp_v = l_in.valid; exp_a = l_in.addr; exp_g = l_in.go; end
      else                 begin exp_v = 0; exp_a = l_out.addr; exp_g = l_out.go; end
      check(l_out.valid == exp_v && (!exp_v || (l_out.addr == exp_a && l_out.go == exp_g)), "left segment");
      // deliveries
      for (int s = 0; s < 2; s++) begin
        case (cfg.rx_from[s])
          RX_LEFT:  begin exp_v = r_in.valid; exp_a = r_in.addr; exp_g = r_in.go; end
          RX_RIGHT: begin exp_v = l_in.valid; exp_a = l_in.addr; exp_g = l_in.go; end
          default:  begin exp_v = cfg.loc && tx_valid[cfg.loc_side]; exp_a = tx_addr[cfg.loc_side];
                          exp_g = tx_ready[cfg.loc_side]; end
        endcase
        exp_v = exp_v && cfg.rx_en[s];
        check(rx_valid[s] == exp_v && (!exp_v || rx_addr[s] == exp_a), "delivery");
        check(rx_commit[s] == (exp_v && exp_g), "commit");
        if (exp_v && cfg.rx_from[s] == RX_LOCAL) n_loc++;
      end
      // readies flowing back
      exp_r = cfg.pass_r ? r_ready_in : 1;
      for (int s = 0; s < 2; s++) if (cfg.rx_en[s] && cfg.rx_from[s] == RX_LEFT) exp_r &= rx_ready[s];
      check(r_ready_out == exp_r, "ready to the left");
      exp_r = cfg.pass_l ? l_ready_in : 1;
      for (int s = 0; s < 2; s++) if (cfg.rx_en[s] && cfg.rx_from[s] == RX_RIGHT) exp_r &= rx_ready[s];
      check(l_ready_out == exp_r, "ready to the right");
      for (int s = 0; s < 2; s++) begin
        exp_r = 1;
        if (cfg.inj_r && cfg.inj_r_side == s[0]) exp_r &= r_ready_in;
        if (cfg.inj_l && cfg.inj_l_side == s[0]) exp_r &= l_ready_in;
        if (cfg.loc && cfg.loc_side == s[0])
          for (int q = 0; q < 2; q++) if (cfg.rx_en[q] && cfg.rx_from[q] == RX_LOCAL) exp_r &= rx_ready[q];
        check(tx_ready[s] == exp_r, "sender ready");
      end
    end
    check(n_pass > 0 && n_inj > 0 && n_loc > 0, "pass, inject and local paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
