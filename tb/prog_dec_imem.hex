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
b3d82c0460ded4b0
516a1c96f74f0689
dd47c62a143559a5
7f443ab201d22715
fd12d920550a4726
6cf9d859d072e2f1
6cf9d859d072e2f1
974117b6367e4120
dd58c61b7cdbc22e
3dd5e1bd350821ac
39abc7d1f70e312d
99f4feac1d553cb2
3cdc063d813e82f1
5a52d792c9cd6c7f
92699861f74c9916
