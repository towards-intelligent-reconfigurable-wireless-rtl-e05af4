05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
05e305e3
ef0c004d
fe47f5f3
1246fe61
0bc70000
1246fe61
fe47f5f3
ef0c004d
05e305e3
004def0c
f5f3fe47
fe611246
00000bc7
fe611246
f5f3fe47
004def0c
ec000000
0193f382
0bbdf273
f43df143
ffa4f91e
099c097a
efb402a0
f066021f
fb841350
f8c602ca
f848f598
08e7fe31
0a86f42e
ef33f7a7
f8adfaf8
04baf369
08000800
0f430086
fd1feb70
078201ea
0322077e
ee7d0611
00200eb8
06d4ff7a
0c7c0350
fb180d97
f1430710
07a80b3a
02b4fc6e
0c65f567
05170e3a
ff580f67
14000000
ff58f099
0517f1c6
0c650a99
02b40392
07a8f4c6
f143f8f0
fb18f269
0c7cfcb0
06d40086
0020f148
ee7df9ef
0322f882
0782fe16
fd1f1490
0f43ff7a
0800f800
04ba0c97
f8ad0508
ef330859
0a860bd2
08e701cf
f8480a68
f8c6fd36
fb84ecb0
f066fde1
efb4fd60
099cf686
ffa406e2
f43d0ebd
0bbd0d8d
01930c7e
ec000000
0193f382
0bbdf273
f43df143
ffa4f91e
099c097a
efb402a0
f066021f
fb841350
f8c602ca
f848f598
08e7fe31
0a86f42e
ef33f7a7
f8adfaf8
04baf369
08000800
0f430086
fd1feb70
078201ea
0322077e
ee7d0611
00200eb8
06d4ff7a
0c7c0350
fb180d97
f1430710
07a80b3a
02b4fc6e
0c65f567
05170e3a
ff580f67
14000000
ff58f099
0517f1c6
0c650a99
02b40392
07a8f4c6
f143f8f0
fb18f269
0c7cfcb0
06d40086
0020f148
ee7df9ef
0322f882
0782fe16
fd1f1490
0f43ff7a
0800f800
04ba0c97
f8ad0508
ef330859
0a860bd2
08e701cf
f8480a68
f8c6fd36
fb84ecb0
f066fde1
efb4fd60
099cf686
ffa406e2
f43d0ebd
0bbd0d8d
01930c7e
ec000000
0193f382
0bbdf273
f43df143
ffa4f91e
099c097a
efb402a0
f066021f
fb841350
f8c602ca
f848f598
08e7fe31
0a86f42e
ef33f7a7
f8adfaf8
04baf369
08000800
0f430086
fd1feb70
078201ea
0322077e
ee7d0611
00200eb8
06d4ff7a
0c7c0350
fb180d97
f1430710
07a80b3a
02b4fc6e
0c65f567
05170e3a
ff580f67
