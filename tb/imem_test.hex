00500093
00c00113
01938d45
92330030
