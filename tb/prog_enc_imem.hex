0000000020010068
00000000f8200000
0000000020210008
00000000f8210000
0000000000000000
0000000000000000
0000000020210008
00000000f8220000
0000000020210008
00000000f8230000
0000000000000000
0000000000000000
0000000020210008
00000000f8240000
0000000020210008
00000000f8250000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
00000000fc000001
517e9015fb7bd8a3
0240a483138d1918
005525337bacb135
e94f73c1f75f6bb2
526c3ea4cf401d28
03969d0b22a39d87
03969d0b22a39d87
13fa3fb265769dda
85ed63bdbda6c17a
2520ae44c95f8d98
3a042b251006a608
ec9fc723e598a5f5
59b169d87d68e625
117eac3c0eb5cb80
f63ff3afbd2da056
